// tb_vx_warp_scheduler: replays the three scheduler scenarios of the paper's
// warp-scheduler figure and checks the warp table.
//
// (a) two active warps, no stalls: warps 0, 1, 0 with visible masks
//     0011, 0010, 0011 (refill when nothing is left);
// (b) warp 0 stalled by decode in cycle 1: cycle 2 refills only 0010 and
//     schedules warp 1 again; the stalled mask shows 0001;
// (c) wspawn to four warps: active becomes 1111, and the next refill gives
//     visible 1111.
// Then: PC advance by 4 per fetch, resolve setting a PC, thread mask and
// clearing the stall, a zero thread mask deactivating a warp, barrier
// mask/release, sched_ready low holding state. Inputs change at negedge;
// combinational outputs are checked just before the rising edge.
module tb_vx_warp_scheduler;
  localparam int NW = 4, NT = 4;
  localparam logic [31:0] PC0 = 32'h8000_0000;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic          sched_valid, sched_ready;
  logic [1:0]    sched_wid;
  logic [31:0]   sched_pc;
  logic [NT-1:0] sched_tmask;
  logic [1:0]    sched_epoch;
  logic          stall_valid = 0;  logic [1:0] stall_wid = 0;
  logic          resolve_valid = 0, resolve_tmask_we = 0;
  logic [1:0]    resolve_wid = 0;  logic [31:0] resolve_pc = 0; logic [NT-1:0] resolve_tmask = 0;
  logic          spawn_valid = 0;  logic [2:0] spawn_num = 0; logic [31:0] spawn_pc = 0;
  logic          bar_valid = 0;    logic [1:0] bar_wid = 0;
  logic          release_valid = 0; logic [NW-1:0] release_mask = 0;
  logic [1:0]    epoch [NW];
  logic [NW-1:0] active_mask, stalled_mask, barrier_mask, visible_mask;

  vx_warp_scheduler #(.NUM_WARPS(NW), .NUM_THREADS(NT), .START_PC(PC0)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0h expected %0h", what, got, exp); end
  endtask

  // check the cycle's scheduling decision, then let the edge happen
  task automatic cyc(string tag, logic v, logic [1:0] w, logic [NW-1:0] vis, logic [NW-1:0] act);
    #4;
    chk({tag, " valid"}, 32'(sched_valid), 32'(v));
    if (v) chk({tag, " warp"}, 32'(sched_wid), 32'(w));
    chk({tag, " visible"}, 32'(visible_mask), 32'(vis));
    chk({tag, " active"}, 32'(active_mask), 32'(act));
    @(negedge clk);
    stall_valid = 0; resolve_valid = 0; resolve_tmask_we = 0; spawn_valid = 0;
    bar_valid = 0; release_valid = 0;
  endtask

  task automatic do_reset_two();
    rst = 1; sched_ready = 0;
    @(negedge clk); @(negedge clk);
    rst = 0;
    spawn_valid = 1; spawn_num = 2; spawn_pc = 32'h100;   // warp 1 active
    @(negedge clk);
    spawn_valid = 0;
    sched_ready = 1;
  endtask

  initial begin
    sched_ready = 0;
    // (a)
    do_reset_two();
    cyc("a0", 1, 0, 4'b0011, 4'b0011);
    cyc("a1", 1, 1, 4'b0010, 4'b0011);
    cyc("a2", 1, 0, 4'b0011, 4'b0011);
    // (b)
    do_reset_two();
    cyc("b0", 1, 0, 4'b0011, 4'b0011);
    stall_valid = 1; stall_wid = 0;            // decode stalls warp 0
    cyc("b1", 1, 1, 4'b0010, 4'b0011);
    chk("b2 stalled", 32'(stalled_mask), 32'b0001);
    cyc("b2", 1, 1, 4'b0010, 4'b0011);
    chk("b epoch bumped", 32'(epoch[0]), 1);
    // warp 0 resolves: new PC and thread mask, unstalled
    resolve_valid = 1; resolve_wid = 0; resolve_pc = 32'h200; resolve_tmask_we = 1; resolve_tmask = 4'b1111;
    cyc("b3", 1, 1, 4'b0010, 4'b0011);
    #4;
    chk("b4 warp", 32'(sched_wid), 0);
    chk("b4 pc", sched_pc, 32'h200);
    chk("b4 tmask", 32'(sched_tmask), 32'b1111);
    chk("b4 unstalled", 32'(stalled_mask), 0);
    @(negedge clk);
    // (c)
    do_reset_two();
    spawn_valid = 1; spawn_num = 4; spawn_pc = 32'h300;   // wspawn executes
    cyc("c0", 1, 0, 4'b0011, 4'b0011);
    cyc("c5", 1, 1, 4'b0010, 4'b1111);
    cyc("c6", 1, 0, 4'b1111, 4'b1111);
    #4; chk("c warp1", 32'(sched_wid), 1); chk("c warp1 pc", sched_pc, 32'h104);
    @(negedge clk);
    #4; chk("c new warp", 32'(sched_wid), 2); chk("c new warp pc", sched_pc, 32'h300);
    chk("c new warp tmask", 32'(sched_tmask), 32'b0001);
    @(negedge clk);
    #4; chk("c warp3", 32'(sched_wid), 3); chk("c warp3 pc", sched_pc, 32'h300);
    @(negedge clk);
    // warp 0 fetched twice before: pc + 8
    #4; chk("refill", 32'(visible_mask), 32'b1111); chk("warp0 pc", sched_pc, PC0 + 32'd8);
    @(negedge clk);
    // hold: no ready, no change
    sched_ready = 0;
    #4; chk("hold warp", 32'(sched_wid), 1);
    @(negedge clk);
    #4; chk("hold warp again", 32'(sched_wid), 1); chk("hold pc", sched_pc, 32'h108);
    @(negedge clk);
    // barrier: warps 1 and 2 wait
    bar_valid = 1; bar_wid = 1;
    @(negedge clk); bar_valid = 1; bar_wid = 2;
    @(negedge clk); bar_valid = 0;
    chk("barrier mask", 32'(barrier_mask), 32'b0110);
    sched_ready = 1;
    #4; chk("skip barrier warps", 32'(visible_mask & 4'b0110), 0);
    @(negedge clk);
    release_valid = 1; release_mask = 4'b0110;
    @(negedge clk); release_valid = 0;
    chk("released", 32'(barrier_mask), 0);
    // deactivate warp 3 with a zero thread mask
    stall_valid = 1; stall_wid = 3;
    @(negedge clk); stall_valid = 0;
    resolve_valid = 1; resolve_wid = 3; resolve_pc = 32'h400; resolve_tmask_we = 1; resolve_tmask = 0;
    @(negedge clk); resolve_valid = 0; resolve_tmask_we = 0;
    chk("warp3 off", 32'(active_mask), 32'b0111);
    // wspawn 1 deactivates warps 1 and 2
    spawn_valid = 1; spawn_num = 1;
    @(negedge clk); spawn_valid = 0;
    chk("spawn 1", 32'(active_mask), 32'b0001);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
