// tb_vx_dcache: random vector loads and stores against a reference memory.
//
// Each request carries four lanes with random masks, addresses (clustered so
// that lanes share lines, share banks and collide in banks, over a range four
// times the cache so lines are evicted) and byte enables. A shadow copy of
// memory is kept here: stores update it, and every load lane must return the
// shadow word. Afterwards the behavioural memory must equal the shadow
// (write-through). The test also requires that misses and bank conflicts were
// reported, and that reloading a just-loaded line causes no miss (a hit).
module tb_vx_dcache;
  localparam int NT = 4;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic req_valid = 0, req_ready, req_rw = 0, rsp_valid;
  logic [NT-1:0] req_mask = 0;
  logic [NT-1:0][31:0] req_addr, req_wdata, rsp_data;
  logic [NT-1:0][3:0] req_byteen;
  logic mem_req_valid, mem_req_ready, mem_req_rw, mem_rsp_valid, miss_event, conflict_event;
  logic [31:0] mem_req_addr, mem_req_wdata;
  logic [3:0] mem_req_byteen;
  logic [127:0] mem_rsp_data;

  vx_dcache #(.NUM_THREADS(NT)) dut (.*);
  tb_mem_model #(.LATENCY(4)) u_mem (
    .clk, .rst, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_rw(mem_req_rw),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata), .req_byteen(mem_req_byteen),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  localparam logic [31:0] BASE = 32'h0001_0000;
  localparam int WORDS = 4096;            // 16 KB region
  logic [31:0] shadow [WORDS];
  int checks = 0, failures = 0, n_miss = 0, n_conf = 0;

  always @(posedge clk) if (!rst) begin
    n_miss += int'(miss_event);
    n_conf += int'(conflict_event);
  end

  task automatic access(bit rw, logic [NT-1:0] m, logic [NT-1:0][31:0] a,
                        logic [NT-1:0][31:0] d, logic [NT-1:0][3:0] be);
    req_valid = 1; req_rw = rw; req_mask = m; req_addr = a; req_wdata = d; req_byteen = be;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk); req_valid = 0;
    while (!rsp_valid) @(negedge clk);
    for (int t = 0; t < NT; t++) if (m[t]) begin
      int w;
      w = int'((a[t] - BASE) >> 2);
      if (rw) begin
        for (int k = 0; k < 4; k++) if (be[t][k]) shadow[w][8*k +: 8] = d[t][8*k +: 8];
      end else begin
        checks++;
        if (rsp_data[t] !== shadow[w]) begin
          failures++;
          $display("FAIL load lane %0d addr %08x: got %08x expected %08x", t, a[t], rsp_data[t], shadow[w]);
        end
      end
    end
  endtask

  initial begin
    logic [NT-1:0][31:0] a, d;
    logic [NT-1:0][3:0] be;
    int m0;
    for (int w = 0; w < WORDS; w++) begin
      shadow[w] = $urandom;
      u_mem.write_word(BASE + 32'(4*w), shadow[w]);
    end
    repeat (2) @(negedge clk); rst = 0;
    for (int i = 0; i < 600; i++) begin
      logic [31:0] line;
      line = BASE + 32'(16 * $urandom_range(0, WORDS/4 - 1));
      for (int t = 0; t < NT; t++) begin
        case ($urandom_range(0, 2))
          0: a[t] = line + 32'(4 * $urandom_range(0, 3));                       // same line
          1: a[t] = BASE + 32'(16 * $urandom_range(0, WORDS/4 - 1)) + 32'(4 * t); // anywhere
          default: a[t] = line + 32'(64 * $urandom_range(1, 8));                 // same bank, other line
        endcase
        if (a[t] >= BASE + 32'(4*WORDS)) a[t] = line;
        d[t] = $urandom;
        be[t] = ($urandom_range(0, 1) == 1) ? 4'hF : 4'($urandom_range(1, 15));
      end
      access($urandom_range(0, 2) == 0, NT'($urandom_range(1, 15)), a, d, be);
    end
    // a repeated load hits
    a = {BASE + 32'h30, BASE + 32'h20, BASE + 32'h10, BASE};
    access(0, '1, a, d, be);
    m0 = n_miss;
    access(0, '1, a, d, be);
    checks++;
    if (n_miss != m0) begin failures++; $display("FAIL reload missed"); end
    // memory equals the shadow (write-through)
    for (int w = 0; w < WORDS; w++) begin
      checks++;
      if (u_mem.read_word(BASE + 32'(4*w)) !== shadow[w]) begin
        failures++;
        if (failures < 10) $display("FAIL memory word %0d not written through", w);
      end
    end
    checks += 2;
    if (n_miss == 0) begin failures++; $display("FAIL no miss reported"); end
    if (n_conf == 0) begin failures++; $display("FAIL no bank conflict reported"); end
    $display("misses %0d conflicts %0d", n_miss, n_conf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
