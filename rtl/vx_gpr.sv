// vx_gpr: general-purpose register file, one table per warp.
//
// 32 registers x NUM_THREADS lanes x 32 bits per warp; at the default 8 warps
// x 4 threads this is the 4 KB register file of the laid-out configuration.
// Two combinational read ports return all lanes of rs1 and rs2 of one warp;
// register x0 reads as zero. One synchronous write port writes rd of one warp
// in the lanes whose bit in wmask is set, so threads switched off by the
// thread mask keep their registers, as the paper requires.
// The array is plain flip-flops here; a memory macro would replace it.
module vx_gpr #(
  parameter int NUM_WARPS   = vx_pkg::NUM_WARPS,
  parameter int NUM_THREADS = vx_pkg::NUM_THREADS,
  localparam int WIDW       = $clog2(NUM_WARPS)
) (
  input  logic                        clk,
  input  logic [WIDW-1:0]             rd_wid,
  input  logic [4:0]                  rs1,
  input  logic [4:0]                  rs2,
  output logic [NUM_THREADS-1:0][31:0] rs1_data,
  output logic [NUM_THREADS-1:0][31:0] rs2_data,
  input  logic                        we,
  input  logic [WIDW-1:0]             wr_wid,
  input  logic [4:0]                  wr_rd,
  input  logic [NUM_THREADS-1:0]      wmask,
  input  logic [NUM_THREADS-1:0][31:0] wdata
);

  logic [NUM_THREADS-1:0][31:0] regs [NUM_WARPS][32];

  always_comb begin
    rs1_data = (rs1 == 5'd0) ? '0 : regs[rd_wid][rs1];
    rs2_data = (rs2 == 5'd0) ? '0 : regs[rd_wid][rs2];
  end

  always_ff @(posedge clk) begin
    if (we && wr_rd != 5'd0)
      for (int t = 0; t < NUM_THREADS; t++)
        if (wmask[t]) regs[wr_wid][wr_rd][t] <= wdata[t];
  end

endmodule
