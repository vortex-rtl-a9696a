// vx_scoreboard: per-warp register scoreboard of the issue stage.
//
// One busy bit per architectural register and warp. Issue sets the bit of the
// destination register when an instruction that writes rd leaves the stage;
// write-back clears it. hazard is high while any register the checked
// instruction reads (rs1, rs2 when used) or writes (rd) is busy in that warp,
// which holds the instruction in issue (read-after-write and write-after-write).
// A clear becomes visible in the next cycle, so no same-cycle bypass exists.
// The paper names the scoreboard (one per warp); these insides are the
// simplest that do its job.
module vx_scoreboard #(
  parameter int NUM_WARPS = vx_pkg::NUM_WARPS,
  localparam int WIDW     = $clog2(NUM_WARPS)
) (
  input  logic            clk,
  input  logic            rst,
  input  logic [WIDW-1:0] chk_wid,
  input  logic [4:0]      chk_rs1,
  input  logic            chk_use_rs1,
  input  logic [4:0]      chk_rs2,
  input  logic            chk_use_rs2,
  input  logic [4:0]      chk_rd,
  input  logic            chk_wb,
  output logic            hazard,
  input  logic            set_valid,
  input  logic [WIDW-1:0] set_wid,
  input  logic [4:0]      set_rd,
  input  logic            clr_valid,
  input  logic [WIDW-1:0] clr_wid,
  input  logic [4:0]      clr_rd
);

  logic [31:0] busy_q [NUM_WARPS];

  always_comb begin
    hazard = (chk_use_rs1 && busy_q[chk_wid][chk_rs1])
          || (chk_use_rs2 && busy_q[chk_wid][chk_rs2])
          || (chk_wb      && busy_q[chk_wid][chk_rd]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int w = 0; w < NUM_WARPS; w++) busy_q[w] <= '0;
    end else begin
      if (clr_valid) busy_q[clr_wid][clr_rd] <= 1'b0;
      if (set_valid && set_rd != 5'd0) busy_q[set_wid][set_rd] <= 1'b1;
    end
  end

  a_set_free: assert property (@(posedge clk) disable iff (rst)
    set_valid |-> !busy_q[set_wid][set_rd]);

endmodule
