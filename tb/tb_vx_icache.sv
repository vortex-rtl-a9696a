// tb_vx_icache: instruction fetch through the cache, hits, misses and stalls.
//
// Memory holds word i = f(address). The test issues fetches of a loop that
// fits the cache twice (second pass must not miss), then random addresses
// over four times the cache size (evictions), each with a tag, and sometimes
// holds rsp_ready low to check that the output stays. Every response must
// carry the right word, address and tag, and a hit must answer in the cycle
// after the request.
module tb_vx_icache;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic req_valid = 0, req_ready, rsp_valid, rsp_ready = 1, mem_req_valid, mem_req_ready, mem_rsp_valid, miss_event;
  logic [31:0] req_addr = 0, rsp_data, rsp_addr, mem_req_addr;
  logic [7:0] req_tag = 0, rsp_tag;
  logic [127:0] mem_rsp_data;

  vx_icache dut (.*);
  tb_mem_model #(.LATENCY(5)) u_mem (
    .clk, .rst, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_rw(1'b0),
    .req_addr(mem_req_addr), .req_wdata(32'd0), .req_byteen(4'd0),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  localparam logic [31:0] BASE = 32'h8000_0000;
  int checks = 0, failures = 0, n_miss = 0;
  always @(posedge clk) if (!rst) n_miss += int'(miss_event);

  function automatic logic [31:0] f(logic [31:0] a);
    return a ^ 32'h5A5A_0000 ^ {a[15:0], 16'h0};
  endfunction

  task automatic fetch(logic [31:0] a, logic [7:0] tg, int hold, output int lat);
    req_valid = 1; req_addr = a; req_tag = tg;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk); req_valid = 0; lat = 1;
    while (!rsp_valid) begin @(negedge clk); lat++; end
    if (hold > 0) begin
      logic [31:0] d0;
      d0 = rsp_data;
      rsp_ready = 0;
      repeat (hold) @(negedge clk);
      checks++;
      if (!rsp_valid || rsp_data !== d0) begin failures++; $display("FAIL output not held"); end
      rsp_ready = 1;
    end
    checks += 3;
    if (rsp_data !== f(a)) begin failures++; $display("FAIL data @%08x: %08x vs %08x", a, rsp_data, f(a)); end
    if (rsp_addr !== a)    begin failures++; $display("FAIL addr @%08x: %08x", a, rsp_addr); end
    if (rsp_tag !== tg)    begin failures++; $display("FAIL tag @%08x", a); end
    @(negedge clk);
  endtask

  initial begin
    int lat, m0;
    for (int w = 0; w < 1024; w++) u_mem.write_word(BASE + 32'(4*w), f(BASE + 32'(4*w)));
    repeat (2) @(negedge clk); rst = 0;
    // loop of 64 instructions, two passes
    for (int i = 0; i < 64; i++) fetch(BASE + 32'(4*i), 8'(i), 0, lat);
    m0 = n_miss;
    checks++;
    if (m0 != 16) begin failures++; $display("FAIL first pass misses %0d, expected 16", m0); end
    for (int i = 0; i < 64; i++) begin
      fetch(BASE + 32'(4*i), 8'(i), (i % 9 == 0) ? 3 : 0, lat);
      checks++;
      if (lat != 1) begin failures++; $display("FAIL hit latency %0d", lat); end
    end
    checks++;
    if (n_miss != m0) begin failures++; $display("FAIL second pass missed"); end
    for (int i = 0; i < 500; i++)
      fetch(BASE + 32'(4 * $urandom_range(0, 1023)), 8'($urandom), (i % 7 == 0) ? 2 : 0, lat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
