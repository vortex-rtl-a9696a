// tb_vx_barrier_table: arrival counting, stalling and release of warp barriers.
//
// Barrier 1 waits for 3 warps: warps 2 and 5 are stalled, warp 7 releases
// mask {2,5} in the same cycle and is not stalled itself. Barrier 0 counts
// independently in between. A bar with a count of one never stalls, and the
// entry is reusable after its release.
module tb_vx_barrier_table;
  localparam int NW = 8, NB = 4;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic bar_valid = 0;
  logic [1:0] bar_id = 0;
  logic [3:0] bar_num = 0;
  logic [2:0] bar_wid = 0;
  logic stall, release_valid;
  logic [NW-1:0] release_mask;

  vx_barrier_table #(.NUM_WARPS(NW), .NUM_BARRIERS(NB)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0h expected %0h", what, got, exp); end
  endtask

  task automatic arrive(string tag, int id, int num, int wid, logic exp_stall, logic exp_rel, logic [NW-1:0] exp_mask);
    bar_valid = 1; bar_id = 2'(id); bar_num = 4'(num); bar_wid = 3'(wid);
    #1;
    chk({tag, " stall"}, 32'(stall), 32'(exp_stall));
    chk({tag, " release"}, 32'(release_valid), 32'(exp_rel));
    if (exp_rel) chk({tag, " mask"}, 32'(release_mask), 32'(exp_mask));
    @(negedge clk); bar_valid = 0;
    #1;
    chk({tag, " idle"}, 32'(release_valid), 0);
  endtask

  initial begin
    @(negedge clk); @(negedge clk); rst = 0;
    arrive("b1 w2", 1, 3, 2, 1, 0, 0);
    arrive("b0 w1", 0, 2, 1, 1, 0, 0);
    arrive("b1 w5", 1, 3, 5, 1, 0, 0);
    arrive("b1 w7", 1, 3, 7, 0, 1, 8'b0010_0100);
    arrive("b0 w3", 0, 2, 3, 0, 1, 8'b0000_0010);
    arrive("single", 2, 1, 4, 0, 0, 0);
    arrive("reuse w0", 1, 2, 0, 1, 0, 0);
    arrive("reuse w6", 1, 2, 6, 0, 1, 8'b0000_0001);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
