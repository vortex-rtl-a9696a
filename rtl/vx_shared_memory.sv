// vx_shared_memory: 8 KB banked scratchpad shared by the warps of a core.
//
// Four banks, word interleaved (bank = word address mod 4), each 512 words.
// The interface is the same vector request as the data cache's: one warp
// memory instruction with NUM_THREADS lane addresses, a lane mask, store data
// and byte enables. After the request is accepted, every cycle each bank
// serves the lowest-numbered pending lane that maps to it, reading or writing
// one word; lanes that collide in a bank wait (conflict_event marks such
// cycles). The cycle after the last lane is served, rsp_valid pulses with all
// load data. Without conflicts a request takes two cycles from acceptance to
// rsp_valid. Only the low 13 address bits are used: the caller selects the
// shared-memory window. Size and bank count follow the paper; the bank mapping
// and the arbitration are this design's choices.
module vx_shared_memory #(
  parameter int NUM_THREADS = vx_pkg::NUM_THREADS,
  parameter int SMEM_BYTES  = 8192,
  parameter int BANKS       = 4,
  localparam int BANK_W     = $clog2(BANKS),
  localparam int WORDS      = SMEM_BYTES / (4 * BANKS),
  localparam int IDX_W      = $clog2(WORDS)
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         req_valid,
  output logic                         req_ready,
  input  logic                         req_rw,
  input  logic [NUM_THREADS-1:0]       req_mask,
  input  logic [NUM_THREADS-1:0][31:0] req_addr,
  input  logic [NUM_THREADS-1:0][31:0] req_wdata,
  input  logic [NUM_THREADS-1:0][3:0]  req_byteen,
  output logic                         rsp_valid,
  output logic [NUM_THREADS-1:0][31:0] rsp_data,
  output logic                         conflict_event
);

  typedef enum logic [1:0] {S_IDLE, S_BUSY, S_DONE} state_e;
  state_e state_q;

  logic [31:0] mem_q [BANKS][WORDS];

  logic                         rw_q;
  logic [NUM_THREADS-1:0]       pend_q;
  logic [NUM_THREADS-1:0][31:0] addr_q, wdata_q, out_q;
  logic [NUM_THREADS-1:0][3:0]  be_q;
  logic [NUM_THREADS-1:0]       cand;

  function automatic logic [BANK_W-1:0] bank_of(logic [31:0] a);
    return a[2 +: BANK_W];
  endfunction
  function automatic logic [IDX_W-1:0] idx_of(logic [31:0] a);
    return a[2 + BANK_W +: IDX_W];
  endfunction

  always_comb begin
    for (int t = 0; t < NUM_THREADS; t++) begin
      cand[t] = pend_q[t];
      for (int u = 0; u < t; u++)
        if (pend_q[u] && bank_of(addr_q[u]) == bank_of(addr_q[t])) cand[t] = 1'b0;
    end
  end

  assign req_ready      = (state_q == S_IDLE);
  assign rsp_valid      = (state_q == S_DONE);
  assign rsp_data       = out_q;
  assign conflict_event = (state_q == S_BUSY) && ((pend_q & ~cand) != '0);

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q <= S_IDLE;
      pend_q  <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (req_valid) begin
          rw_q    <= req_rw;
          pend_q  <= req_mask;
          addr_q  <= req_addr;
          wdata_q <= req_wdata;
          be_q    <= req_byteen;
          out_q   <= '0;
          state_q <= S_BUSY;
        end
        S_BUSY: begin
          for (int t = 0; t < NUM_THREADS; t++)
            if (cand[t]) begin
              if (rw_q) begin
                for (int k = 0; k < 4; k++)
                  if (be_q[t][k]) mem_q[bank_of(addr_q[t])][idx_of(addr_q[t])][8 * k +: 8] <= wdata_q[t][8 * k +: 8];
              end else begin
                out_q[t] <= mem_q[bank_of(addr_q[t])][idx_of(addr_q[t])];
              end
            end
          pend_q <= pend_q & ~cand;
          if ((pend_q & ~cand) == '0) state_q <= S_DONE;
        end
        default: state_q <= S_IDLE;   // S_DONE: response shown for one cycle
      endcase
    end
  end

endmodule
