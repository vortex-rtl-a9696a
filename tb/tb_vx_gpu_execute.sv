// tb_vx_gpu_execute: the warp-control decisions of the five SIMT instructions.
//
// The instructions are encoded with the test assembler and decoded by the
// real decoder (split a0 must decode from the published word 0x0005206b,
// join from 0x0000306b). Cases: tmc with 1, 3 and 0 threads; wspawn with the
// warp count clamped; a divergent split (pushes both entries, keeps the true
// threads) and a uniform one (pushes only a fall-through entry); join
// popping a not-taken entry (jumps to its PC with its mask), a fall-through
// entry (restores the mask, continues at PC+4) and an empty stack (no-op);
// bar with id and count, local and global (id MSB set); and no request at all when the instruction is not
// valid. Scalar operands must come from the lowest active thread.
module tb_vx_gpu_execute;
  import vx_pkg::*;
  import tb_rv_asm_pkg::*;
  localparam int NW = 8, NT = 4, NB = 4;

  logic [31:0] instr, pc;
  decoded_t dec;
  logic valid;
  logic [NT-1:0] tmask, ipdom_top_mask;
  logic [NT-1:0][31:0] rs1_data, rs2_data;
  logic ipdom_empty, ipdom_top_ft;
  logic [31:0] ipdom_top_pc;
  logic [31:0] next_pc, ipdom_push_pc, spawn_pc;
  logic tmask_we, ipdom_push, ipdom_push_ft, ipdom_pop, spawn_valid, bar_valid, diverged;
  logic [NT-1:0] new_tmask, ipdom_push_ft_mask, ipdom_push_mask;
  logic [3:0] spawn_num, bar_num;
  logic [1:0] bar_id;
  logic bar_global;
  logic [31:0] bar_count;
  logic [30:0] bar_global_id;

  vx_decoder u_dec (.instr, .dec);
  vx_gpu_execute #(.NUM_WARPS(NW), .NUM_THREADS(NT), .NUM_BARRIERS(NB)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0h expected %0h", what, got, exp); end
  endtask
  task automatic quiet(string tag, bit allow_tm, bit allow_push, bit allow_pop, bit allow_sp, bit allow_bar);
    if (!allow_tm)   chk({tag, " no tmask_we"}, 32'(tmask_we), 0);
    if (!allow_push) chk({tag, " no push"}, 32'(ipdom_push | ipdom_push_ft), 0);
    if (!allow_pop)  chk({tag, " no pop"}, 32'(ipdom_pop), 0);
    if (!allow_sp)   chk({tag, " no spawn"}, 32'(spawn_valid), 0);
    if (!allow_bar)  chk({tag, " no bar"}, 32'(bar_valid), 0);
  endtask

  initial begin
    valid = 1; pc = 32'h8000_0040; ipdom_empty = 1; ipdom_top_ft = 0; ipdom_top_pc = 0; ipdom_top_mask = 0;
    rs2_data = '0;
    // tmc
    instr = tmc(A0); tmask = 4'b0001; rs1_data = {32'd0, 32'd0, 32'd0, 32'd3}; #1;
    chk("tmc3 we", 32'(tmask_we), 1); chk("tmc3 mask", 32'(new_tmask), 4'b0111); chk("tmc pc", next_pc, pc + 4);
    quiet("tmc", 1, 0, 0, 0, 0);
    tmask = 4'b0110; rs1_data = {32'd9, 32'd4, 32'd1, 32'd9}; #1;
    chk("tmc lowest active lane", 32'(new_tmask), 4'b0001);
    rs1_data = '0; #1;
    chk("tmc0 mask", 32'(new_tmask), 0);
    // wspawn
    instr = wspawn(A0, A1); tmask = 4'b1111;
    rs1_data = {32'd1, 32'd1, 32'd1, 32'd5}; rs2_data = {32'd0, 32'd0, 32'd0, 32'h8000_0100}; #1;
    chk("wspawn valid", 32'(spawn_valid), 1); chk("wspawn num", 32'(spawn_num), 5); chk("wspawn pc", spawn_pc, 32'h8000_0100);
    quiet("wspawn", 0, 0, 0, 1, 0);
    rs1_data[0] = 32'd100; #1;
    chk("wspawn clamp", 32'(spawn_num), NW);
    // split: published encoding
    instr = 32'h0005206b; tmask = 4'b1111;
    rs1_data = {32'd0, 32'd1, 32'd0, 32'd7}; #1;    // lanes 0 and 2 true
    chk("split decodes", 32'(dec.unit == EX_GPU && dec.gpu_op == GPU_SPLIT), 1);
    chk("div split push", 32'(ipdom_push), 1); chk("div split not ft-only", 32'(ipdom_push_ft), 0);
    chk("div ft mask", 32'(ipdom_push_ft_mask), 4'b1111);
    chk("div nt mask", 32'(ipdom_push_mask), 4'b1010);
    chk("div nt pc", ipdom_push_pc, pc + 4);
    chk("div new mask", 32'(new_tmask), 4'b0101); chk("div we", 32'(tmask_we), 1);
    chk("div flag", 32'(diverged), 1); chk("div pc", next_pc, pc + 4);
    quiet("split", 1, 1, 0, 0, 0);
    tmask = 4'b0101; #1;                               // only true lanes active: uniform
    chk("uni push", 32'(ipdom_push), 0); chk("uni push_ft", 32'(ipdom_push_ft), 1);
    chk("uni ft mask", 32'(ipdom_push_ft_mask), 4'b0101); chk("uni no we", 32'(tmask_we), 0);
    chk("uni flag", 32'(diverged), 0);
    tmask = 4'b1010; #1;                               // all false: uniform as well
    chk("uni false push_ft", 32'(ipdom_push_ft), 1); chk("uni false no push", 32'(ipdom_push), 0);
    // join
    instr = 32'h0000306b; tmask = 4'b0101;
    ipdom_empty = 0; ipdom_top_ft = 0; ipdom_top_pc = 32'h8000_0044; ipdom_top_mask = 4'b1010; #1;
    chk("join decodes", 32'(dec.unit == EX_GPU && dec.gpu_op == GPU_JOIN), 1);
    chk("join nt pop", 32'(ipdom_pop), 1); chk("join nt pc", next_pc, 32'h8000_0044);
    chk("join nt mask", 32'(new_tmask), 4'b1010); chk("join nt we", 32'(tmask_we), 1);
    quiet("join", 1, 0, 1, 0, 0);
    ipdom_top_ft = 1; ipdom_top_mask = 4'b1111; ipdom_top_pc = 32'hDEAD_BEE0; #1;
    chk("join ft pop", 32'(ipdom_pop), 1); chk("join ft pc", next_pc, pc + 4); chk("join ft mask", 32'(new_tmask), 4'b1111);
    ipdom_empty = 1; #1;
    chk("join empty no pop", 32'(ipdom_pop), 0); chk("join empty no we", 32'(tmask_we), 0); chk("join empty pc", next_pc, pc + 4);
    // bar
    instr = bar(A0, A1); tmask = 4'b1100;
    rs1_data = {32'd0, 32'd2, 32'd0, 32'd0}; rs2_data = {32'd0, 32'd6, 32'd0, 32'd0}; #1;
    chk("bar valid", 32'(bar_valid), 1); chk("bar id", 32'(bar_id), 2); chk("bar num", 32'(bar_num), 6);
    chk("bar local", 32'(bar_global), 0);
    rs1_data[2] = 32'h8000_0005; rs2_data[2] = 32'd40; #1;
    chk("bar global", 32'(bar_global), 1); chk("bar global id", 32'(bar_global_id), 5);
    chk("bar count unclamped", bar_count, 40);
    quiet("bar", 0, 0, 0, 0, 0 | 1);
    // not valid: nothing
    valid = 0; #1;
    quiet("invalid", 0, 0, 0, 0, 0);
    // non-GPU instruction: nothing
    valid = 1; instr = addi(1, 2, 3); #1;
    quiet("addi", 0, 0, 0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
