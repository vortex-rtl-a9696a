// vx_lsu: load/store unit of the execute stage.
//
// Takes one warp load or store at a time (start pulse or level; it is taken
// when the unit is idle). For every thread whose thread-mask bit is set it
// forms the address rs1 + imm, the store data shifted into its byte lanes and
// the byte enables (SB/SH/SW). Lanes whose address falls in the 8 KB
// shared-memory window at SMEM_BASE go to the shared memory, all others to the
// data cache; the two vector requests are sent in the cycle after start and
// run in parallel. When both have answered, `done` pulses for one cycle with
// the load result of every lane, shifted and sign- or zero-extended
// (LB/LH/LW/LBU/LHU). Masked-off threads make no request, so they change
// nothing in memory (as the paper requires). The window address and the
// blocking, one-instruction-at-a-time behaviour are this design's choices.
module vx_lsu
  import vx_pkg::*;
#(
  parameter int          NUM_THREADS = vx_pkg::NUM_THREADS,
  parameter logic [31:0] SMEM_BASE   = vx_pkg::SMEM_BASE,
  parameter int          SMEM_BYTES  = 8192
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         start,
  input  logic                         is_store,
  input  logic [2:0]                   mem_f3,
  input  logic [31:0]                  imm,
  input  logic [NUM_THREADS-1:0]       tmask,
  input  logic [NUM_THREADS-1:0][31:0] rs1_data,
  input  logic [NUM_THREADS-1:0][31:0] rs2_data,
  output logic                         busy,
  output logic                         done,
  output logic [NUM_THREADS-1:0][31:0] ldata,

  output logic                         dc_req_valid,
  input  logic                         dc_req_ready,
  output logic                         dc_req_rw,
  output logic [NUM_THREADS-1:0]       dc_req_mask,
  output logic [NUM_THREADS-1:0][31:0] dc_req_addr,
  output logic [NUM_THREADS-1:0][31:0] dc_req_wdata,
  output logic [NUM_THREADS-1:0][3:0]  dc_req_byteen,
  input  logic                         dc_rsp_valid,
  input  logic [NUM_THREADS-1:0][31:0] dc_rsp_data,

  output logic                         sm_req_valid,
  input  logic                         sm_req_ready,
  output logic                         sm_req_rw,
  output logic [NUM_THREADS-1:0]       sm_req_mask,
  output logic [NUM_THREADS-1:0][31:0] sm_req_addr,
  output logic [NUM_THREADS-1:0][31:0] sm_req_wdata,
  output logic [NUM_THREADS-1:0][3:0]  sm_req_byteen,
  input  logic                         sm_rsp_valid,
  input  logic [NUM_THREADS-1:0][31:0] sm_rsp_data
);

  localparam int WIN_W = $clog2(SMEM_BYTES);

  typedef enum logic [1:0] {S_IDLE, S_REQ, S_DONE} state_e;
  state_e state_q;

  logic                         st_q;
  logic [2:0]                   f3_q;
  logic [NUM_THREADS-1:0]       dmask_q, smask_q;
  logic [NUM_THREADS-1:0][31:0] addr_q, wdata_q, raw_q;
  logic [NUM_THREADS-1:0][3:0]  be_q;
  logic                         dsent_q, ssent_q, dgot_q, sgot_q;

  logic [NUM_THREADS-1:0][31:0] addr_c, wdata_c;
  logic [NUM_THREADS-1:0][3:0]  be_c;
  logic [NUM_THREADS-1:0]       in_smem;

  always_comb begin
    for (int t = 0; t < NUM_THREADS; t++) begin
      addr_c[t]  = rs1_data[t] + imm;
      wdata_c[t] = rs2_data[t] << (8 * addr_c[t][1:0]);
      unique case (mem_f3[1:0])
        2'b00:   be_c[t] = 4'b0001 << addr_c[t][1:0];
        2'b01:   be_c[t] = 4'b0011 << addr_c[t][1:0];
        default: be_c[t] = 4'b1111;
      endcase
      in_smem[t] = (addr_c[t][31:WIN_W] == SMEM_BASE[31:WIN_W]);
    end
  end

  assign busy          = (state_q != S_IDLE);
  assign dc_req_valid  = (state_q == S_REQ) && !dsent_q && (dmask_q != '0);
  assign dc_req_rw     = st_q;
  assign dc_req_mask   = dmask_q;
  assign dc_req_addr   = addr_q;
  assign dc_req_wdata  = wdata_q;
  assign dc_req_byteen = be_q;
  assign sm_req_valid  = (state_q == S_REQ) && !ssent_q && (smask_q != '0);
  assign sm_req_rw     = st_q;
  assign sm_req_mask   = smask_q;
  assign sm_req_addr   = addr_q;
  assign sm_req_wdata  = wdata_q;
  assign sm_req_byteen = be_q;
  assign done          = (state_q == S_DONE);

  // load alignment and extension
  always_comb begin
    for (int t = 0; t < NUM_THREADS; t++) begin
      logic [31:0] w;
      w = raw_q[t] >> (8 * addr_q[t][1:0]);
      unique case (f3_q)
        3'b000:  ldata[t] = {{24{w[7]}}, w[7:0]};
        3'b001:  ldata[t] = {{16{w[15]}}, w[15:0]};
        3'b100:  ldata[t] = {24'b0, w[7:0]};
        3'b101:  ldata[t] = {16'b0, w[15:0]};
        default: ldata[t] = w;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q <= S_IDLE;
      dsent_q <= 1'b0; ssent_q <= 1'b0;
      dgot_q  <= 1'b0; sgot_q  <= 1'b0;
    end else begin
      unique case (state_q)
        S_IDLE: if (start) begin
          st_q    <= is_store;
          f3_q    <= mem_f3;
          addr_q  <= addr_c;
          wdata_q <= wdata_c;
          be_q    <= be_c;
          dmask_q <= tmask & ~in_smem;
          smask_q <= tmask & in_smem;
          dsent_q <= 1'b0; ssent_q <= 1'b0;
          dgot_q  <= ((tmask & ~in_smem) == '0);
          sgot_q  <= ((tmask & in_smem) == '0);
          raw_q   <= '0;
          state_q <= S_REQ;
        end
        S_REQ: begin
          if (dc_req_valid && dc_req_ready) dsent_q <= 1'b1;
          if (sm_req_valid && sm_req_ready) ssent_q <= 1'b1;
          if (dc_rsp_valid && dsent_q && !dgot_q) begin
            dgot_q <= 1'b1;
            for (int t = 0; t < NUM_THREADS; t++) if (dmask_q[t]) raw_q[t] <= dc_rsp_data[t];
          end
          if (sm_rsp_valid && ssent_q && !sgot_q) begin
            sgot_q <= 1'b1;
            for (int t = 0; t < NUM_THREADS; t++) if (smask_q[t]) raw_q[t] <= sm_rsp_data[t];
          end
          if (dgot_q && sgot_q) state_q <= S_DONE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

endmodule
