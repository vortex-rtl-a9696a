// tb_vortex_kernels: four data-parallel kernels run on the full-size core.
//
// Integer versions of benchmark kernels evaluated for this architecture
// (saxpy, sgemm) and of the patterns of two others (bfs, gaussian), small
// enough to simulate at the default size (8 warps x 4 threads = 32 hardware
// threads):
//   saxpy : Y[i] = 3*X[i] + Y[i] for 64 elements (each thread does 2)
//   sgemm : C = A*B for 8x8 matrices (each thread computes 2 elements,
//           8 multiply-adds each)
//   popcount: bits set in each of 64 words; the loop body runs only while
//           the thread's word is non-zero, so it diverges inside split/join
//           in every round (an irregular, data-dependent kernel)
//   barrier phases: every thread writes its elements, all warps meet at a
//           bar, then every thread reads elements written by other warps
//           (the phase pattern of kernels such as gaussian); warp w spins
//           32*w rounds first, so the result depends on the barrier
// Each kernel uses the usual launch sequence (wspawn all warps, tmc all
// threads, global id from the id CSRs) and a grid-stride loop whose trip
// count is the same for every thread. The core is reset between the
// runs. Inputs are generated here; every output word is compared with a
// value computed here, and the cycle count of each kernel is printed. The
// kernels use integers because the core implements RV32IM (no floating point).
module tb_vortex_kernels;
  import vx_pkg::*;
  import tb_rv_asm_pkg::*;

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

  // the kernels use no global barrier
  assign gbar_release_valid = 1'b0;
  assign gbar_release_mask  = '0;

  int checks = 0, failures = 0;
  logic [31:0] prog [$];

  function automatic int here();
    return prog.size();
  endfunction
  function automatic void emit(logic [31:0] w);
    prog.push_back(w);
  endfunction

  // launch: all warps, all threads; s2 = gid, s3 = total threads
  task automatic prologue();
    int i_addr, i_jal, i_wrap;
    prog.delete();
    emit(csrr(A0, 'hFC1));
    i_addr = here();
    emit(auipc(A1, 0));
    emit(32'h0);
    emit(wspawn(A0, A1));
    i_jal = here();
    emit(32'h0);
    i_wrap = here();
    prog[i_addr + 1] = addi(A1, A1, 4 * (i_wrap - i_addr));
    prog[i_jal]      = jal(ZERO, 4 * (i_wrap - i_jal));
    emit(csrr(T0, 'hFC0));
    emit(tmc(T0));
    emit(csrr(T0, 'hFC0));
    emit(csrr(S0, 'hCC0));
    emit(csrr(S1, 'hCC1));
    emit(mul(T1, S1, T0));
    emit(add(S2, T1, S0));
    emit(csrr(T2, 'hFC1));
    emit(mul(S3, T2, T0));
  endtask

  task automatic run(string name);
    foreach (prog[i]) u_mem.write_word(vx_pkg::START_PC + 32'(4 * i), prog[i]);
    rst = 1'b1;
    repeat (3) @(posedge clk);
    rst = 1'b0;
    @(posedge clk);
    while (busy) @(posedge clk);
    repeat (3) @(posedge clk);
    $display("%s: %0d cycles, %0d warp instructions", name, cycles, instrs);
  endtask

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d, expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] x [64], y [64], a [64], b [64];

  initial begin
    int i_loop, i_inner;
    // ---------------------------------------------------------------- saxpy
    for (int i = 0; i < 64; i++) begin
      x[i] = $urandom_range(0, 1000); y[i] = $urandom_range(0, 1000);
      u_mem.write_word(32'h2000 + 32'(4*i), x[i]);
      u_mem.write_word(32'h2400 + 32'(4*i), y[i]);
    end
    prologue();
    emit(add(S5, S2, ZERO));           // i = gid
    emit(addi(S6, ZERO, 64));          // n
    emit(lui(T2, 32'h2));              // X base
    emit(addi(T6, ZERO, 3));           // a
    i_loop = here();
    emit(slli(T1, S5, 2));
    emit(add(T3, T2, T1));
    emit(lw(T4, T3, 0));
    emit(lw(T5, T3, 'h400));
    emit(mul(T4, T4, T6));
    emit(add(T4, T4, T5));
    emit(sw(T4, T3, 'h400));
    emit(add(S5, S5, S3));
    emit(blt(S5, S6, 4 * (i_loop - here())));
    emit(tmc(ZERO));
    run("saxpy");
    for (int i = 0; i < 64; i++)
      check($sformatf("saxpy Y[%0d]", i), u_mem.read_word(32'h2400 + 32'(4*i)), 3 * x[i] + y[i]);

    // ---------------------------------------------------------------- sgemm
    for (int i = 0; i < 64; i++) begin
      a[i] = $urandom_range(0, 50); b[i] = $urandom_range(0, 50);
      u_mem.write_word(32'h3000 + 32'(4*i), a[i]);
      u_mem.write_word(32'h3100 + 32'(4*i), b[i]);
    end
    prologue();
    emit(add(S5, S2, ZERO));           // idx = gid
    emit(addi(S6, ZERO, 64));
    emit(lui(S4, 32'h3));              // A base 0x3000, B at +0x100, C at +0x200
    i_loop = here();
    emit(srai(T1, S5, 3));             // row
    emit(andi(T2, S5, 7));             // col
    emit(addi(T3, ZERO, 0));           // sum
    emit(addi(T4, ZERO, 0));           // k
    emit(slli(A3, T1, 5));
    emit(add(A3, A3, S4));             // &A[row][0]
    emit(slli(A4, T2, 2));
    emit(add(A4, A4, S4));
    emit(addi(A4, A4, 'h100));         // &B[0][col]
    emit(addi(A7, ZERO, 8));
    i_inner = here();
    emit(lw(A5, A3, 0));
    emit(lw(A6, A4, 0));
    emit(mul(A5, A5, A6));
    emit(add(T3, T3, A5));
    emit(addi(A3, A3, 4));
    emit(addi(A4, A4, 32));
    emit(addi(T4, T4, 1));
    emit(blt(T4, A7, 4 * (i_inner - here())));
    emit(slli(T5, S5, 2));
    emit(add(T5, T5, S4));
    emit(sw(T3, T5, 'h200));
    emit(add(S5, S5, S3));
    emit(blt(S5, S6, 4 * (i_loop - here())));
    emit(tmc(ZERO));
    run("sgemm");
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < 8; c++) begin
        logic [31:0] s;
        s = 0;
        for (int k = 0; k < 8; k++) s += a[8*r + k] * b[8*k + c];
        check($sformatf("sgemm C[%0d][%0d]", r, c), u_mem.read_word(32'h3200 + 32'(4*(8*r + c))), s);
      end

    // ------------------------------------------------- popcount (divergent)
    for (int i = 0; i < 64; i++) begin
      x[i] = $urandom & $urandom;
      if (i % 5 == 0) x[i] = 0;
      u_mem.write_word(32'h4000 + 32'(4*i), x[i]);
    end
    prologue();
    emit(add(S5, S2, ZERO));
    emit(addi(S6, ZERO, 64));
    emit(lui(S4, 32'h4));              // X at 0x4000, counts at 0x4100
    i_loop = here();
    emit(slli(T1, S5, 2));
    emit(add(T1, T1, S4));
    emit(lw(T3, T1, 0));               // x
    emit(addi(T4, ZERO, 0));           // count
    emit(addi(A7, ZERO, 32));          // 32 rounds, same for every thread
    i_inner = here();
    emit(r_type(0, T3, ZERO, 3, A0, 'h33));   // sltu a0, zero, x  (x != 0)
    emit(split(A0));
    emit(beq(A0, ZERO, 16));           // to the join
    emit(addi(T5, T3, -1));
    emit(r_type(0, T5, T3, 7, T3, 'h33));     // and x, x, x-1
    emit(addi(T4, T4, 1));
    emit(join_());
    emit(addi(A7, A7, -1));
    emit(bne(A7, ZERO, 4 * (i_inner - here())));
    emit(sw(T4, T1, 'h100));
    emit(add(S5, S5, S3));
    emit(blt(S5, S6, 4 * (i_loop - here())));
    emit(tmc(ZERO));
    run("popcount");
    for (int i = 0; i < 64; i++)
      check($sformatf("popcount[%0d]", i), u_mem.read_word(32'h4100 + 32'(4*i)), $countones(x[i]));

    // ------------------------------------------- two phases around a barrier
    for (int i = 0; i < 64; i++) begin
      x[i] = $urandom % 1000;
      u_mem.write_word(32'h5000 + 32'(4*i), x[i]);
    end
    prologue();                        // T2 = number of warps
    emit(add(S5, S2, ZERO));
    emit(addi(S6, ZERO, 64));
    emit(lui(S4, 32'h5));              // X at 0x5000, A at 0x5100, B at 0x5200
    emit(csrr(T5, 'hCC1));             // warp w first spins 32*w rounds, so
    emit(slli(T5, T5, 5));             // without the barrier low warps would
    emit(beq(T5, ZERO, 12));           // read A before high warps wrote it
    emit(addi(T5, T5, -1));
    emit(jal(ZERO, -8));
    i_loop = here();                   // phase 1: A[i] = 3*X[i] + i
    emit(slli(T1, S5, 2));
    emit(add(T1, T1, S4));
    emit(lw(T3, T1, 0));
    emit(slli(T4, T3, 1));
    emit(add(T3, T3, T4));
    emit(add(T3, T3, S5));
    emit(sw(T3, T1, 'h100));
    emit(add(S5, S5, S3));
    emit(blt(S5, S6, 4 * (i_loop - here())));
    emit(addi(A0, ZERO, 1));           // barrier 1, all warps
    emit(add(A1, T2, ZERO));
    emit(bar(A0, A1));
    emit(add(S5, S2, ZERO));
    i_loop = here();                   // phase 2: B[i] = A[(i+17)%64] + A[(i+40)%64]
    emit(addi(T3, S5, 17));
    emit(andi(T3, T3, 63));
    emit(slli(T3, T3, 2));
    emit(add(T3, T3, S4));
    emit(lw(T4, T3, 'h100));
    emit(addi(T3, S5, 40));
    emit(andi(T3, T3, 63));
    emit(slli(T3, T3, 2));
    emit(add(T3, T3, S4));
    emit(lw(T5, T3, 'h100));
    emit(add(T4, T4, T5));
    emit(slli(T1, S5, 2));
    emit(add(T1, T1, S4));
    emit(sw(T4, T1, 'h200));
    emit(add(S5, S5, S3));
    emit(blt(S5, S6, 4 * (i_loop - here())));
    emit(tmc(ZERO));
    run("barrier phases");
    for (int i = 0; i < 64; i++)
      check($sformatf("phase2[%0d]", i), u_mem.read_word(32'h5200 + 32'(4*i)),
            3*x[(i+17)%64] + 32'((i+17)%64) + 3*x[(i+40)%64] + 32'((i+40)%64));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
