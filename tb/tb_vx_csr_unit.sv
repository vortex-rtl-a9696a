// tb_vx_csr_unit: id/count CSRs per lane and the cycle/instruction counters.
//
// Checks thread id per lane, warp id, core id and the NT/NW/NC constants,
// then runs the clock with a known retire pattern and compares the 64-bit
// cycle and instret counters (both halves) with counts kept here.
module tb_vx_csr_unit;
  import vx_pkg::*;
  localparam int NW = 8, NT = 4;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic instr_retired = 0;
  logic [11:0] csr = 0;
  logic [2:0] wid = 0;
  logic [NT-1:0][31:0] rdata;
  logic [63:0] cycles, instrs;

  vx_csr_unit #(.NUM_WARPS(NW), .NUM_THREADS(NT), .CORE_ID(32'd3), .NUM_CORES(2)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0h expected %0h", what, got, exp); end
  endtask

  int ncyc, nret;
  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    ncyc = 0; nret = 0;
    csr = CSR_TID; #1;
    for (int t = 0; t < NT; t++) chk("tid", rdata[t], t);
    csr = CSR_WID;
    for (int w = 0; w < NW; w++) begin wid = 3'(w); #1; chk("wid", rdata[1], w); end
    csr = CSR_CID; #1; chk("cid", rdata[3], 3);
    csr = CSR_NT;  #1; chk("nt", rdata[0], NT);
    csr = CSR_NW;  #1; chk("nw", rdata[2], NW);
    csr = CSR_NC;  #1; chk("nc", rdata[0], 2);
    csr = 12'h123; #1; chk("unknown reads zero", rdata[0], 0);
    @(negedge clk);
    chk("cycle count", cycles[31:0], 2);
    for (int i = 0; i < 50; i++) begin
      instr_retired = (i % 3 != 0);
      @(negedge clk);
    end
    instr_retired = 0;
    chk("instret", instrs[31:0], 33);
    csr = CSR_INSTR; #1; chk("instret csr", rdata[1], 33);
    csr = CSR_INSTRH; #1; chk("instreth", rdata[1], 0);
    csr = CSR_CYCLE; #1; chk("cycle csr", rdata[2], 52);
    csr = CSR_CYCLEH; #1; chk("cycleh", rdata[2], 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
