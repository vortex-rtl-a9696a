// tb_vx_shared_memory: banked scratchpad, random vector loads and stores.
//
// Random masks, byte enables and addresses in the 8 KB window (clustered so
// lanes sometimes share a bank) against a shadow array kept here. Every load
// lane must return the shadow word. A request with all lanes in different
// banks must finish in the minimum time with no conflict; one with all lanes
// in one bank must report a conflict and take longer.
module tb_vx_shared_memory;
  localparam int NT = 4, BYTES = 8192;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic req_valid = 0, req_ready, req_rw = 0, rsp_valid, conflict_event;
  logic [NT-1:0] req_mask = 0;
  logic [NT-1:0][31:0] req_addr, req_wdata, rsp_data;
  logic [NT-1:0][3:0] req_byteen;

  vx_shared_memory #(.NUM_THREADS(NT), .SMEM_BYTES(BYTES)) dut (.*);

  localparam logic [31:0] BASE = 32'hFF00_0000;
  logic [31:0] shadow [BYTES/4];
  bit written [BYTES/4];
  int checks = 0, failures = 0, n_conf = 0;
  always @(posedge clk) if (!rst) n_conf += int'(conflict_event);

  task automatic access(bit rw, logic [NT-1:0] m, logic [NT-1:0][31:0] a,
                        logic [NT-1:0][31:0] d, logic [NT-1:0][3:0] be, output int cyc);
    req_valid = 1; req_rw = rw; req_mask = m; req_addr = a; req_wdata = d; req_byteen = be;
    cyc = 0;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk); req_valid = 0;
    while (!rsp_valid) begin @(negedge clk); cyc++; end
    for (int t = 0; t < NT; t++) if (m[t]) begin
      int w;
      w = int'((a[t] - BASE) >> 2);
      if (rw) begin
        for (int k = 0; k < 4; k++) if (be[t][k]) shadow[w][8*k +: 8] = d[t][8*k +: 8];
        written[w] = 1;
      end else if (written[w]) begin
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
    int c_free, c_conf, c0;
    repeat (2) @(negedge clk); rst = 0;
    // fill every word once
    for (int w = 0; w < BYTES/4; w += NT) begin
      for (int t = 0; t < NT; t++) begin a[t] = BASE + 32'(4*(w+t)); d[t] = $urandom; be[t] = 4'hF; end
      access(1, '1, a, d, be, c0);
    end
    for (int i = 0; i < 600; i++) begin
      for (int t = 0; t < NT; t++) begin
        a[t] = ($urandom_range(0, 1) == 0) ? BASE + 32'(4 * $urandom_range(0, BYTES/4 - 1))
                                           : BASE + 32'(16 * $urandom_range(0, 7)) + 32'(4 * t);
        d[t] = $urandom;
        be[t] = 4'($urandom_range(1, 15));
      end
      access($urandom_range(0, 1), NT'($urandom_range(1, 15)), a, d, be, c0);
    end
    // timing: distinct banks vs one bank
    for (int t = 0; t < NT; t++) a[t] = BASE + 32'h100 + 32'(4*t);
    c0 = n_conf;
    access(0, '1, a, d, be, c_free);
    checks++;
    if (n_conf != c0) begin failures++; $display("FAIL conflict without a shared bank"); end
    for (int t = 0; t < NT; t++) a[t] = BASE + 32'h100 + 32'(16*t);
    c0 = n_conf;
    access(0, '1, a, d, be, c_conf);
    checks += 2;
    if (n_conf == c0) begin failures++; $display("FAIL no conflict reported"); end
    if (c_conf < c_free + NT - 1) begin
      failures++; $display("FAIL bank conflict took %0d cycles, conflict-free %0d", c_conf, c_free);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
