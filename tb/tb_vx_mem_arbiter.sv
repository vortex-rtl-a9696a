// tb_vx_mem_arbiter: sharing of the single memory port by D-cache and I-cache.
//
// Both clients issue requests (the D-cache reads and writes, the I-cache
// reads) at random times against the behavioural memory. Checks: every
// request gets exactly one response on its own client, the read data is the
// line the memory holds, writes land in memory, a client never receives
// another's response, and when both ask in the same idle cycle the D-cache
// goes first. A client holds its request until it is accepted.
module tb_vx_mem_arbiter;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic c0_req_valid = 0, c0_req_ready, c0_req_rw = 0, c0_rsp_valid;
  logic [31:0] c0_req_addr = 0, c0_req_wdata = 0;
  logic [3:0] c0_req_byteen = 0;
  logic c1_req_valid = 0, c1_req_ready, c1_rsp_valid;
  logic [31:0] c1_req_addr = 0;
  logic [127:0] rsp_data;
  logic mem_req_valid, mem_req_ready, mem_req_rw, mem_rsp_valid;
  logic [31:0] mem_req_addr, mem_req_wdata;
  logic [3:0] mem_req_byteen;
  logic [127:0] mem_rsp_data;

  vx_mem_arbiter dut (.*);
  tb_mem_model #(.LATENCY(3)) u_mem (
    .clk, .rst, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_rw(mem_req_rw),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata), .req_byteen(mem_req_byteen),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  int checks = 0, failures = 0;
  task automatic chk(string what, logic [127:0] got, logic [127:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0h expected %0h", what, got, exp); end
  endtask

  function automatic logic [127:0] line(logic [31:0] a);
    logic [127:0] l;
    for (int k = 0; k < 4; k++) l[32*k +: 32] = u_mem.read_word({a[31:4], 4'b0} + 32'(4*k));
    return l;
  endfunction

  // client 0
  int n0 = 0, n1 = 0, w0 = 0;
  logic [31:0] wr_shadow [int];
  initial begin : client0
    @(negedge clk); @(negedge clk); @(negedge clk);
    for (int i = 0; i < 40; i++) begin
      logic [31:0] a;
      bit rw;
      repeat ($urandom_range(0, 3)) @(negedge clk);
      a = 32'h2000 + 32'(4 * $urandom_range(0, 63));
      rw = $urandom_range(0, 1);
      c0_req_valid = 1; c0_req_rw = rw; c0_req_addr = a; c0_req_wdata = $urandom; c0_req_byteen = 4'hF;
      @(posedge clk);
      while (!c0_req_ready) @(posedge clk);
      @(negedge clk); c0_req_valid = 0;
      while (!c0_rsp_valid) @(negedge clk);
      checks++;
      if (c1_rsp_valid) begin failures++; $display("FAIL both clients answered"); end
      if (rw) begin
        chk("c0 write landed", 128'(u_mem.read_word(a)), 128'(c0_req_wdata));
        w0++;
      end else
        chk("c0 read line", rsp_data, line(a));
      n0++;
    end
  end

  initial begin : client1
    @(negedge clk); @(negedge clk); @(negedge clk);
    for (int i = 0; i < 40; i++) begin
      logic [31:0] a;
      repeat ($urandom_range(0, 3)) @(negedge clk);
      a = 32'h8000_0000 + 32'(16 * $urandom_range(0, 15));
      c1_req_valid = 1; c1_req_addr = a;
      @(posedge clk);
      while (!c1_req_ready) @(posedge clk);
      @(negedge clk); c1_req_valid = 0;
      while (!c1_rsp_valid) @(negedge clk);
      chk("c1 read line", rsp_data, line(a));
      n1++;
    end
  end

  // priority: both ask in the same cycle while idle
  int both = 0, c0_first = 0;
  always @(posedge clk)
    if (!rst && c0_req_valid && c1_req_valid && c0_req_ready | c1_req_ready) begin
      both++;
      if (c0_req_ready && !c1_req_ready) c0_first++;
    end

  initial begin
    for (int a = 0; a < 64; a++) u_mem.write_word(32'h8000_0000 + 32'(4*a), 32'hC0DE_0000 + 32'(a));
    for (int a = 0; a < 64; a++) u_mem.write_word(32'h2000 + 32'(4*a), 32'hDA7A_0000 + 32'(a));
    @(negedge clk); rst = 0;
    wait (n0 == 40 && n1 == 40);
    chk("all c0 answered", 128'(n0), 128'(40));
    chk("all c1 answered", 128'(n1), 128'(40));
    checks++;
    if (both == 0 || c0_first != both) begin
      failures++; $display("FAIL priority: %0d simultaneous, %0d to the D-cache", both, c0_first);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
