// tb_vx_execute_unit: per-lane ALU/M results and branch resolution.
//
// Instructions are encoded with the test assembler and decoded by the real
// decoder, so the test covers the decoder-to-ALU operand path. For each
// R-type, immediate and M-extension operation, random and corner operands
// (zero divisor, overflow, negative values) are fed to all four lanes and
// every lane is compared with a reference computed here. Branches are
// resolved on the lowest active thread: lane values differ per lane, and the
// test checks that only the lowest lane in the mask decides, that the link
// value is PC+4 and that JAL/JALR targets are right.
module tb_vx_execute_unit;
  import vx_pkg::*;
  import tb_rv_asm_pkg::*;
  localparam int NT = 4;

  logic [31:0] instr, pc;
  decoded_t dec;
  logic [NT-1:0] tmask;
  logic [NT-1:0][31:0] rs1_data, rs2_data, result;
  logic br_taken;
  logic [31:0] next_pc;

  vx_decoder u_dec (.instr, .dec);
  vx_execute_unit #(.NUM_THREADS(NT)) dut (.dec, .pc, .tmask, .rs1_data, .rs2_data, .result, .br_taken, .next_pc);

  int checks = 0, failures = 0;
  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %08x expected %08x", what, got, exp); end
  endtask

  function automatic logic [31:0] ref_r(int k, logic [31:0] a, logic [31:0] b);
    logic signed [63:0] p;
    logic [31:0] q;
    // signed operations in their own statements, so the unsigned arms of the
    // conditionals below cannot turn them unsigned
    case (k)
      0: return a + b;
      1: return a - b;
      2: return a << b[4:0];
      3: return {31'b0, $signed(a) < $signed(b)};
      4: return {31'b0, a < b};
      5: return a ^ b;
      6: return a >> b[4:0];
      7: return $signed(a) >>> b[4:0];
      8: return a | b;
      9: return a & b;
      10: return a * b;
      11: begin p = $signed(a) * $signed(b); return p[63:32]; end
      12: begin p = $signed({{32{a[31]}}, a}) * $signed({32'b0, b}); return p[63:32]; end
      13: begin p = {32'b0, a} * {32'b0, b}; return p[63:32]; end
      14: begin q = $signed(a) / $signed(b); return (b == 0) ? 32'hFFFF_FFFF : (a == 32'h8000_0000 && b == 32'hFFFF_FFFF) ? a : q; end
      15: return (b == 0) ? 32'hFFFF_FFFF : a / b;
      16: begin q = $signed(a) % $signed(b); return (b == 0) ? a : (a == 32'h8000_0000 && b == 32'hFFFF_FFFF) ? 0 : q; end
      default: return (b == 0) ? a : a % b;
    endcase
  endfunction

  function automatic logic [31:0] enc_r(int k);
    //           f7  f3
    int f7[18] = '{0, 32, 0, 0, 0, 0, 0, 32, 0, 0, 1, 1, 1, 1, 1, 1, 1, 1};
    int f3[18] = '{0, 0, 1, 2, 3, 4, 5, 5, 6, 7, 0, 1, 2, 3, 4, 5, 6, 7};
    return r_type(f7[k], 3, 2, f3[k], 1, 7'h33);
  endfunction

  function automatic logic [31:0] pick();
    case ($urandom_range(0, 5))
      0: return 0;
      1: return 32'h8000_0000;
      2: return 32'hFFFF_FFFF;
      3: return $urandom_range(0, 40);
      default: return $urandom;
    endcase
  endfunction

  initial begin
    pc = 32'h8000_0100; tmask = '1;
    // register-register, all 18 ops
    for (int k = 0; k < 18; k++)
      for (int n = 0; n < 20; n++) begin
        instr = enc_r(k);
        for (int t = 0; t < NT; t++) begin rs1_data[t] = pick(); rs2_data[t] = pick(); end
        #1;
        for (int t = 0; t < NT; t++)
          chk($sformatf("r-op %0d lane %0d", k, t), result[t], ref_r(k, rs1_data[t], rs2_data[t]));
        chk("r-op not a branch", 32'(br_taken), 0);
      end
    // immediates
    for (int n = 0; n < 20; n++) begin
      int imm;
      imm = $urandom_range(0, 4095) - 2048;
      for (int t = 0; t < NT; t++) rs1_data[t] = pick();
      instr = addi(1, 2, imm); #1;
      for (int t = 0; t < NT; t++) chk("addi", result[t], rs1_data[t] + 32'(imm));
      instr = andi(1, 2, imm); #1;
      for (int t = 0; t < NT; t++) chk("andi", result[t], rs1_data[t] & 32'(imm));
      instr = srai(1, 2, imm & 31); #1;
      for (int t = 0; t < NT; t++) chk("srai", result[t], $signed(rs1_data[t]) >>> (imm & 31));
    end
    instr = lui(1, 32'hABCDE); #1;
    chk("lui", result[2], 32'hABCDE000);
    instr = auipc(1, 32'h00012); #1;
    chk("auipc", result[0], pc + 32'h12000);

    // branches on the lowest active thread
    rs1_data = {32'd5, 32'd5, 32'd7, 32'd9};   // lanes 3..0
    rs2_data = {32'd5, 32'd5, 32'd5, 32'd9};
    instr = beq(2, 3, 64);
    tmask = 4'b1111; #1; chk("beq lane0 eq", 32'(br_taken), 1); chk("beq target", next_pc, pc + 64);
    tmask = 4'b1110; #1; chk("beq lane1 ne", 32'(br_taken), 0); chk("beq fallthrough", next_pc, pc + 4);
    tmask = 4'b1100; #1; chk("beq lane2 eq", 32'(br_taken), 1);
    chk("link value", result[1], pc + 4);
    instr = blt(2, 3, -16);
    rs1_data[0] = 32'hFFFF_FFFF; rs2_data[0] = 1;
    tmask = 4'b0001; #1; chk("blt signed", 32'(br_taken), 1); chk("blt back", next_pc, pc - 16);
    instr = b_type(8, 3, 2, 6); #1;  // bltu
    chk("bltu unsigned", 32'(br_taken), 0);
    instr = jal(1, 2048); #1;
    chk("jal taken", 32'(br_taken), 1); chk("jal target", next_pc, pc + 2048); chk("jal link", result[0], pc + 4);
    rs1_data[0] = 32'h8000_0401;
    instr = jalr(1, 2, 6); #1;
    chk("jalr target", next_pc, 32'h8000_0406);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
