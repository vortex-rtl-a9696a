// tb_vx_writeback: result selection and one-cycle register of the W stage.
//
// Drives one instruction per cycle from the ALU, CSR and LSU units (with and
// without a destination register, and with idle cycles) and checks, one cycle
// later, that the register-file write carries the right unit's data, warp,
// register and thread mask, that the scoreboard clear and retire strobes
// follow, and that nothing is written for idle cycles or rd-less ones.
module tb_vx_writeback;
  import vx_pkg::*;
  localparam int NW = 8, NT = 4;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic in_valid = 0, in_wb = 0;
  ex_unit_e in_unit = EX_ALU;
  logic [2:0] in_wid = 0;
  logic [4:0] in_rd = 0;
  logic [NT-1:0] in_tmask = 0;
  logic [NT-1:0][31:0] alu_result, csr_result, lsu_result;
  logic gpr_we, sb_clr, retired;
  logic [2:0] gpr_wid;
  logic [4:0] gpr_rd;
  logic [NT-1:0] gpr_wmask;
  logic [NT-1:0][31:0] gpr_wdata;

  vx_writeback #(.NUM_WARPS(NW), .NUM_THREADS(NT)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0h expected %0h", what, got, exp); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    #1 chk("idle after reset", 32'(gpr_we | retired | sb_clr), 0);
    for (int i = 0; i < 60; i++) begin
      logic v, wb;
      logic [NT-1:0][31:0] exp_d;
      ex_unit_e u;
      v = ($urandom_range(0, 3) != 0); wb = $urandom_range(0, 1);
      case ($urandom_range(0, 3))
        0: u = EX_CSR;
        1: u = EX_LSU;
        2: u = EX_BR;
        default: u = EX_ALU;
      endcase
      for (int t = 0; t < NT; t++) begin
        alu_result[t] = $urandom; csr_result[t] = $urandom; lsu_result[t] = $urandom;
      end
      exp_d = (u == EX_CSR) ? csr_result : (u == EX_LSU) ? lsu_result : alu_result;
      in_valid = v; in_wb = wb; in_unit = u; in_wid = 3'($urandom); in_rd = 5'($urandom);
      in_tmask = NT'($urandom);
      @(negedge clk);
      chk("we", 32'(gpr_we), 32'(v && wb));
      chk("sb_clr", 32'(sb_clr), 32'(v && wb));
      chk("retired", 32'(retired), 32'(v));
      if (v && wb) begin
        chk("wid", 32'(gpr_wid), 32'(in_wid));
        chk("rd", 32'(gpr_rd), 32'(in_rd));
        chk("mask", 32'(gpr_wmask), 32'(in_tmask));
        for (int t = 0; t < NT; t++) chk("data", gpr_wdata[t], exp_d[t]);
      end
      in_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
