// tb_vx_gpr: register file writes under thread masks, per-warp separation, x0.
//
// Writes random values to random (warp, register, lane-mask) triples and keeps
// a reference copy; after each write both read ports are compared with the
// reference for random registers. Lanes outside the write mask must keep
// their old value and x0 must read zero.
module tb_vx_gpr;
  localparam int NW = 8, NT = 4;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [2:0] rd_wid = 0, wr_wid = 0;
  logic [4:0] rs1 = 0, rs2 = 0, wr_rd = 0;
  logic [NT-1:0][31:0] rs1_data, rs2_data, wdata;
  logic we = 0;
  logic [NT-1:0] wmask = 0;

  vx_gpr #(.NUM_WARPS(NW), .NUM_THREADS(NT)) dut (.*);

  logic [31:0] model [NW][32][NT];
  int checks = 0, failures = 0;

  initial begin
    // known contents first
    for (int w = 0; w < NW; w++)
      for (int r = 1; r < 32; r++) begin
        we = 1; wr_wid = 3'(w); wr_rd = 5'(r); wmask = '1;
        for (int t = 0; t < NT; t++) begin
          wdata[t] = {8'(w), 8'(r), 8'(t), 8'hA5};
          model[w][r][t] = wdata[t];
        end
        @(negedge clk);
      end
    for (int t = 0; t < NT; t++) for (int w = 0; w < NW; w++) model[w][0][t] = 0;
    for (int i = 0; i < 400; i++) begin
      we = 1; wr_wid = 3'($urandom); wr_rd = 5'($urandom); wmask = NT'($urandom);
      for (int t = 0; t < NT; t++) wdata[t] = $urandom;
      if (wr_rd != 0)
        for (int t = 0; t < NT; t++) if (wmask[t]) model[wr_wid][wr_rd][t] = wdata[t];
      @(negedge clk);
      we = 0;
      rd_wid = 3'($urandom); rs1 = 5'($urandom); rs2 = (i % 4 == 0) ? 5'd0 : wr_rd;
      if (i % 2 == 0) rd_wid = wr_wid;
      #1;
      for (int t = 0; t < NT; t++) begin
        checks++;
        if (rs1_data[t] !== model[rd_wid][rs1][t]) begin
          failures++; $display("FAIL rs1 w%0d r%0d t%0d", rd_wid, rs1, t);
        end
        checks++;
        if (rs2_data[t] !== model[rd_wid][rs2][t]) begin
          failures++; $display("FAIL rs2 w%0d r%0d t%0d", rd_wid, rs2, t);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
