// vx_writeback: write-back stage of the Vortex pipeline.
//
// A pipeline register after execute. In the cycle an instruction leaves
// execute (in_valid) it selects the value to write from the unit that ran it:
// ALU or link address (ALU and branch units), the CSR read, or the aligned load
// data. One cycle later it writes that value to rd of the warp in the lanes of
// the instruction's thread mask, clears rd's scoreboard bit, and reports the
// instruction as retired. Instructions without a destination only retire.
// Since one instruction leaves execute per cycle, no arbitration is needed.
module vx_writeback
  import vx_pkg::*;
#(
  parameter int NUM_WARPS   = vx_pkg::NUM_WARPS,
  parameter int NUM_THREADS = vx_pkg::NUM_THREADS,
  localparam int WIDW       = $clog2(NUM_WARPS)
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         in_valid,
  input  ex_unit_e                     in_unit,
  input  logic                         in_wb,
  input  logic [WIDW-1:0]              in_wid,
  input  logic [4:0]                   in_rd,
  input  logic [NUM_THREADS-1:0]       in_tmask,
  input  logic [NUM_THREADS-1:0][31:0] alu_result,
  input  logic [NUM_THREADS-1:0][31:0] csr_result,
  input  logic [NUM_THREADS-1:0][31:0] lsu_result,

  output logic                         gpr_we,
  output logic [WIDW-1:0]              gpr_wid,
  output logic [4:0]                   gpr_rd,
  output logic [NUM_THREADS-1:0]       gpr_wmask,
  output logic [NUM_THREADS-1:0][31:0] gpr_wdata,
  output logic                         sb_clr,
  output logic                         retired
);

  logic                         v_q, wb_q;
  logic [WIDW-1:0]              wid_q;
  logic [4:0]                   rd_q;
  logic [NUM_THREADS-1:0]       mask_q;
  logic [NUM_THREADS-1:0][31:0] data_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      v_q  <= 1'b0;
      wb_q <= 1'b0;
    end else begin
      v_q <= in_valid;
      if (in_valid) begin
        wb_q   <= in_wb;
        wid_q  <= in_wid;
        rd_q   <= in_rd;
        mask_q <= in_tmask;
        unique case (in_unit)
          EX_CSR:  data_q <= csr_result;
          EX_LSU:  data_q <= lsu_result;
          default: data_q <= alu_result;
        endcase
      end
    end
  end

  assign gpr_we    = v_q && wb_q;
  assign gpr_wid   = wid_q;
  assign gpr_rd    = rd_q;
  assign gpr_wmask = mask_q;
  assign gpr_wdata = data_q;
  assign sb_clr    = v_q && wb_q;
  assign retired   = v_q;

endmodule
