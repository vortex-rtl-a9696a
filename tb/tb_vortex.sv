// tb_vortex: end-to-end test of the Vortex core at its default size
// (8 warps x 4 threads, 1 KB I-cache, 4 KB data cache, 8 KB shared memory).
//
// The program follows the kernel-launch pattern of the runtime: warp 0 reads
// the warp count from a CSR, spawns all warps with wspawn at a wrapper, and
// jumps there itself. Each warp turns on all its threads with tmc, computes a
// global id gid = wid*NT + tid from the id CSRs, and then:
//   A[gid] = 3*gid                       (data cache, stores)
//   S[gid] = 5*gid                       (shared memory)
//   B[gid] = tid<2 ? gid+100 : gid+200   (divergent split/branch/join)
//   uniform split/join                   (all threads agree)
//   bar 0, NW                            (all warps meet)
//   bar 0x80000003, NW                   (global barrier: leaves the core and
//                                         is released by a table model here)
//   C[gid] = S[(gid+1) mod N]            (reads another warp's shared data)
//   E[gid] = S[4*tid]                    (all lanes in one shared-memory bank)
//   D[gid] = (5+4+3+2+1) + 7*gid/3       (loop with a taken branch, mul, div)
//   F[gid] = A[gid] + 1                  (data-cache load miss and line fill)
// and finally switches itself off with tmc 0. The test waits for `busy` to
// fall, then compares every array in the memory model with values computed
// here. It also counts the core's event strobes and counts a failure for each
// mechanism that never occurred (warp stall, scoreboard hold, divergent and
// uniform split, join, wspawn, tmc, barrier stall and release, global barrier
// request and release, taken branch,
// I- and D-cache misses, D-cache and shared-memory bank conflicts, LSU wait).
module tb_vortex;
  import vx_pkg::*;
  import tb_rv_asm_pkg::*;

  localparam int NW = vx_pkg::NUM_WARPS;
  localparam int NT = vx_pkg::NUM_THREADS;
  localparam int N  = NW * NT;
  localparam logic [31:0] BASE_A = 32'h0000_1000;

  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  logic         busy;
  logic         mem_req_valid, mem_req_ready, mem_req_rw, mem_rsp_valid;
  logic [31:0]  mem_req_addr, mem_req_wdata;
  logic [3:0]   mem_req_byteen;
  logic [127:0] mem_rsp_data;
  vx_events_t   events;
  logic         gbar_req_valid, gbar_release_valid;
  logic [30:0]  gbar_req_id;
  logic [31:0]  gbar_req_count;
  logic [2:0]   gbar_req_wid;
  logic [vx_pkg::NUM_WARPS-1:0] gbar_release_mask;
  logic [63:0]  cycles, instrs;

  vortex dut (
    .clk, .rst, .busy,
    .mem_req_valid, .mem_req_ready, .mem_req_rw, .mem_req_addr, .mem_req_wdata,
    .mem_req_byteen, .mem_rsp_valid, .mem_rsp_data,
    .gbar_req_valid, .gbar_req_id, .gbar_req_count, .gbar_req_wid,
    .gbar_release_valid, .gbar_release_mask,
    .events, .cycles, .instrs
  );

  tb_mem_model #(.LATENCY(6)) u_mem (
    .clk, .rst,
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_rw(mem_req_rw),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata), .req_byteen(mem_req_byteen),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data)
  );

  int checks = 0, failures = 0;

  // ------------------------------------------------------------ program
  logic [31:0] prog [$];

  function automatic int here();
    return prog.size();
  endfunction
  function automatic void emit(logic [31:0] w);
    prog.push_back(w);
  endfunction

  task automatic build_program();
    int i_jal, i_addr, i_wrap, i_beq, i_jend, i_else, i_endif, i_loop;
    // main (warp 0 only)
    emit(csrr(A0, 'hFC1));          // a0 = number of warps
    i_addr = here();
    emit(auipc(A1, 0));               // a1 = pc
    emit(32'h0);                      // addi a1, a1, wrapper-offset (patched)
    emit(wspawn(A0, A1));
    i_jal = here();
    emit(32'h0);                      // jal wrapper (patched)
    // wrapper
    i_wrap = here();
    prog[i_addr + 1] = addi(A1, A1, 4 * (i_wrap - i_addr));
    prog[i_jal]      = jal(ZERO, 4 * (i_wrap - i_jal));
    emit(csrr(T0, 'hFC0));          // t0 = threads per warp
    emit(tmc(T0));
    emit(csrr(T0, 'hFC0));          // again, now in every lane
    emit(csrr(S0, 'hCC0));          // tid
    emit(csrr(S1, 'hCC1));          // wid
    emit(mul(T1, S1, T0));
    emit(add(S2, T1, S0));            // gid
    emit(slli(S3, S2, 2));            // gid*4
    emit(lui(S4, 32'h1));             // A base 0x1000
    emit(lui(S5, 32'hFF000));         // shared memory base
    emit(addi(T2, ZERO, 3));
    emit(mul(T3, S2, T2));
    emit(add(T4, S4, S3));
    emit(sw(T3, T4, 0));              // A[gid] = 3*gid
    emit(addi(T2, ZERO, 5));
    emit(mul(T3, S2, T2));
    emit(add(T4, S5, S3));
    emit(sw(T3, T4, 0));              // S[gid] = 5*gid
    // divergent if/else
    emit(slti(A0, S0, 2));
    emit(split(A0));
    i_beq = here();
    emit(32'h0);                      // beq a0, zero, else (patched)
    emit(addi(A2, S2, 100));
    i_jend = here();
    emit(32'h0);                      // jal endif (patched)
    i_else = here();
    emit(addi(A2, S2, 200));
    i_endif = here();
    emit(join_());
    prog[i_beq]  = beq(A0, ZERO, 4 * (i_else - i_beq));
    prog[i_jend] = jal(ZERO, 4 * (i_endif - i_jend));
    emit(add(T4, S4, S3));
    emit(sw(A2, T4, 32'h100));        // B[gid]
    // uniform split
    emit(addi(A0, ZERO, 1));
    emit(split(A0));
    emit(join_());
    // barrier over all warps
    emit(addi(A0, ZERO, 0));
    emit(csrr(A1, 'hFC1));
    emit(bar(A0, A1));
    // global barrier (id MSB set) over all warps, served by the model below
    emit(lui(A0, 32'h80000));
    emit(addi(A0, A0, 3));
    emit(bar(A0, A1));
    // C[gid] = S[(gid+1) mod N]
    emit(csrr(T2, 'hFC1));
    emit(mul(T2, T2, T0));            // N
    emit(addi(T1, S2, 1));
    emit(remu(T1, T1, T2));
    emit(slli(T1, T1, 2));
    emit(add(T4, S5, T1));
    emit(lw(T3, T4, 0));
    emit(add(T4, S4, S3));
    emit(sw(T3, T4, 32'h200));
    // E[gid] = S[4*tid]: every lane in bank 0
    emit(slli(T1, S0, 4));
    emit(add(T4, S5, T1));
    emit(lw(T3, T4, 0));
    emit(add(T4, S4, S3));
    emit(sw(T3, T4, 32'h300));
    // loop: t5 = 5+4+3+2+1
    emit(addi(T5, ZERO, 0));
    emit(addi(T6, ZERO, 5));
    i_loop = here();
    emit(add(T5, T5, T6));
    emit(addi(T6, T6, -1));
    emit(bne(T6, ZERO, 4 * (i_loop - here())));
    // D[gid] = t5 + 7*gid/3
    emit(addi(T2, ZERO, 7));
    emit(mul(T3, S2, T2));
    emit(addi(T2, ZERO, 3));
    emit(div_(T3, T3, T2));
    emit(add(T3, T3, T5));
    emit(add(T4, S4, S3));
    emit(sw(T3, T4, 32'h400));
    // F[gid] = A[gid] + 1
    emit(lw(T3, T4, 0));
    emit(addi(T3, T3, 1));
    emit(sw(T3, T4, 32'h500));
    emit(tmc(ZERO));
  endtask

  // ------------------------------------------------------------ event counters
  int n_stall, n_sb, n_div, n_uni, n_join, n_spawn, n_tmc, n_bar, n_rel, n_br;
  int n_icm, n_dcm, n_dcc, n_smc, n_lsu, n_drop;

  always_ff @(posedge clk) begin
    if (rst) begin
      {n_stall, n_sb, n_div, n_uni, n_join, n_spawn, n_tmc, n_bar, n_rel, n_br} <= '0;
      {n_icm, n_dcm, n_dcc, n_smc, n_lsu, n_drop} <= '0;
    end else begin
      n_stall <= n_stall + int'(events.warp_stall);
      n_sb    <= n_sb    + int'(events.sb_hazard);
      n_div   <= n_div   + int'(events.split_diverge);
      n_uni   <= n_uni   + int'(events.split_uniform);
      n_join  <= n_join  + int'(events.join_pop);
      n_spawn <= n_spawn + int'(events.wspawn);
      n_tmc   <= n_tmc   + int'(events.tmc);
      n_bar   <= n_bar   + int'(events.bar_stall);
      n_rel   <= n_rel   + int'(events.bar_release);
      n_br    <= n_br    + int'(events.branch_taken);
      n_icm   <= n_icm   + int'(events.icache_miss);
      n_dcm   <= n_dcm   + int'(events.dcache_miss);
      n_dcc   <= n_dcc   + int'(events.dcache_conflict);
      n_smc   <= n_smc   + int'(events.smem_conflict);
      n_lsu   <= n_lsu   + int'(events.lsu_wait);
      n_drop  <= n_drop  + int'(events.fetch_drop);
    end
  end

  // global barrier table model: collects the arrivals of id 3 and releases
  // them one cycle after the last one
  int          n_gbar, n_grel, g_bad;
  int          g_count;
  logic [NW-1:0] g_mask;
  always_ff @(posedge clk) begin
    if (rst) begin
      g_count <= 0; g_mask <= '0; n_gbar <= 0; n_grel <= 0; g_bad <= 0;
      gbar_release_valid <= 1'b0; gbar_release_mask <= '0;
    end else begin
      gbar_release_valid <= 1'b0;
      if (gbar_req_valid) begin
        n_gbar <= n_gbar + 1;
        if (gbar_req_id != 31'd3) begin
          g_bad <= g_bad + 1; $display("FAIL global barrier id %0d", gbar_req_id);
        end
        if (g_count + 1 == int'(gbar_req_count)) begin
          gbar_release_valid <= 1'b1;
          gbar_release_mask  <= g_mask | (NW'(1) << gbar_req_wid);
          g_count <= 0; g_mask <= '0; n_grel <= n_grel + 1;
        end else begin
          g_count <= g_count + 1;
          g_mask  <= g_mask | (NW'(1) << gbar_req_wid);
        end
      end
    end
  end

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d (0x%08x), expected %0d", what, got, got, exp);
    end
  endtask

  task automatic happened(string what, int n, int min_n);
    checks++;
    $display("  %-22s %0d", what, n);
    if (n < min_n) begin
      failures++;
      $display("FAIL mechanism %s occurred %0d times, expected at least %0d", what, n, min_n);
    end
  endtask

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog: core still busy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    build_program();
    foreach (prog[i]) u_mem.write_word(vx_pkg::START_PC + 32'(4 * i), prog[i]);
    repeat (3) @(posedge clk);
    rst = 1'b0;
    @(posedge clk);
    while (busy) @(posedge clk);
    repeat (5) @(posedge clk);
    $display("finished after %0d cycles, %0d warp instructions retired", cycles, instrs);

    for (int g = 0; g < N; g++) begin
      int tid;
      tid = g % NT;
      check($sformatf("A[%0d]", g), u_mem.read_word(BASE_A + 32'(4*g)),         32'(3*g));
      check($sformatf("B[%0d]", g), u_mem.read_word(BASE_A + 32'h100 + 32'(4*g)), 32'(tid < 2 ? g + 100 : g + 200));
      check($sformatf("C[%0d]", g), u_mem.read_word(BASE_A + 32'h200 + 32'(4*g)), 32'(5 * ((g + 1) % N)));
      check($sformatf("E[%0d]", g), u_mem.read_word(BASE_A + 32'h300 + 32'(4*g)), 32'(5 * 4 * tid));
      check($sformatf("D[%0d]", g), u_mem.read_word(BASE_A + 32'h400 + 32'(4*g)), 32'(15 + (7 * g) / 3));
      check($sformatf("F[%0d]", g), u_mem.read_word(BASE_A + 32'h500 + 32'(4*g)), 32'(3 * g + 1));
    end

    $display("mechanisms:");
    happened("warp stall",        n_stall, 1);
    happened("scoreboard hold",   n_sb,    1);
    happened("divergent split",   n_div,   NW);
    happened("uniform split",     n_uni,   NW);
    happened("join",              n_join,  3 * NW);
    happened("wspawn",            n_spawn, 1);
    happened("tmc",               n_tmc,   2 * NW);
    happened("barrier stall",     n_bar,   NW - 1);
    happened("barrier release",   n_rel,   1);
    happened("global barrier req",  n_gbar,  NW);
    happened("global bar release",  n_grel,  1);
    check("global barrier ids", 32'(g_bad), 0);
    happened("taken branch",      n_br,    1);
    happened("icache miss",       n_icm,   1);
    happened("dcache miss",       n_dcm,   1);
    happened("dcache conflict",   n_dcc,   1);
    happened("smem conflict",     n_smc,   1);
    happened("lsu wait",          n_lsu,   1);
    $display("  %-22s %0d (guard, need not occur)", "stale fetch dropped", n_drop);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
