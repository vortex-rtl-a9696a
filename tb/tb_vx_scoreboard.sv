// tb_vx_scoreboard: busy-bit set/clear and hazard detection per warp.
//
// Sets registers busy in two warps, then checks that a read of rs1 or rs2 or a
// write of rd to a busy register reports a hazard only in its own warp, that
// unused operands are ignored, that x0 never becomes busy, and that a clear
// removes the hazard from the next cycle on.
module tb_vx_scoreboard;
  localparam int NW = 8;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic [2:0] chk_wid = 0, set_wid = 0, clr_wid = 0;
  logic [4:0] chk_rs1 = 0, chk_rs2 = 0, chk_rd = 0, set_rd = 0, clr_rd = 0;
  logic chk_use_rs1 = 0, chk_use_rs2 = 0, chk_wb = 0, set_valid = 0, clr_valid = 0, hazard;

  vx_scoreboard #(.NUM_WARPS(NW)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask
  task automatic probe(string tag, int w, int r1, bit u1, int r2, bit u2, int rd, bit wb, logic exp);
    chk_wid = 3'(w); chk_rs1 = 5'(r1); chk_use_rs1 = u1; chk_rs2 = 5'(r2); chk_use_rs2 = u2;
    chk_rd = 5'(rd); chk_wb = wb;
    #1 chk(tag, hazard, exp);
  endtask

  initial begin
    @(negedge clk); @(negedge clk); rst = 0;
    probe("clean", 3, 5, 1, 6, 1, 7, 1, 0);
    set_valid = 1; set_wid = 3; set_rd = 5;
    @(negedge clk);
    set_wid = 6; set_rd = 9;
    @(negedge clk);
    set_wid = 2; set_rd = 0;   // x0 never busy
    @(negedge clk); set_valid = 0;
    probe("raw rs1", 3, 5, 1, 1, 1, 2, 1, 1);
    probe("raw rs2", 3, 1, 1, 5, 1, 2, 1, 1);
    probe("waw rd", 3, 1, 1, 2, 1, 5, 1, 1);
    probe("unused rs1", 3, 5, 0, 1, 1, 2, 1, 0);
    probe("other warp", 4, 5, 1, 5, 1, 5, 1, 0);
    probe("warp6", 6, 9, 1, 0, 0, 0, 0, 1);
    probe("x0", 2, 0, 1, 0, 1, 0, 0, 0);
    @(negedge clk);
    clr_valid = 1; clr_wid = 3; clr_rd = 5;
    #1 probe("clear not yet visible", 3, 5, 1, 0, 0, 0, 0, 1);
    @(negedge clk); clr_valid = 0;
    probe("cleared", 3, 5, 1, 5, 1, 5, 1, 0);
    probe("warp6 still", 6, 0, 0, 9, 1, 0, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
