// vx_execute_unit: the integer execute unit, one RV32IM ALU lane per thread.
//
// Combinational. Every lane applies the decoded ALU operation to its own rs1
// and rs2 (or the immediate); LUI and AUIPC use the warp's PC. Multiply and
// divide are single-cycle here (the paper gives no latency); division by zero
// and signed overflow give the RISC-V results.
// For branch and jump instructions the lane result is the link address PC+4,
// and the unit resolves the warp's next PC. Branch conditions are evaluated in
// the lowest active thread: the paper handles divergence only with split/join,
// so this design assumes ordinary branches agree across the active threads.
module vx_execute_unit
  import vx_pkg::*;
#(
  parameter int NUM_THREADS = vx_pkg::NUM_THREADS
) (
  input  decoded_t                     dec,
  input  logic [31:0]                  pc,
  input  logic [NUM_THREADS-1:0]       tmask,
  input  logic [NUM_THREADS-1:0][31:0] rs1_data,
  input  logic [NUM_THREADS-1:0][31:0] rs2_data,
  output logic [NUM_THREADS-1:0][31:0] result,
  output logic                         br_taken,
  output logic [31:0]                  next_pc
);

  function automatic logic [31:0] alu(alu_op_e op, logic [31:0] a, logic [31:0] b, logic [31:0] pc_i);
    logic [63:0] p;
    logic [31:0] r;
    unique case (op)
      ALU_ADD:    r = a + b;
      ALU_SUB:    r = a - b;
      ALU_SLL:    r = a << b[4:0];
      ALU_SLT:    r = {31'b0, $signed(a) < $signed(b)};
      ALU_SLTU:   r = {31'b0, a < b};
      ALU_XOR:    r = a ^ b;
      ALU_SRL:    r = a >> b[4:0];
      ALU_SRA:    r = 32'($signed(a) >>> b[4:0]);
      ALU_OR:     r = a | b;
      ALU_AND:    r = a & b;
      ALU_LUI:    r = b;
      ALU_AUIPC:  r = pc_i + b;
      ALU_MUL:    r = a * b;
      ALU_MULH:   begin p = 64'($signed({{32{a[31]}}, a}) * $signed({{32{b[31]}}, b})); r = p[63:32]; end
      ALU_MULHSU: begin p = 64'($signed({{32{a[31]}}, a}) * $signed({32'b0, b}));      r = p[63:32]; end
      ALU_MULHU:  begin p = {32'b0, a} * {32'b0, b};                                   r = p[63:32]; end
      ALU_DIV:    if (b == 0) r = '1;
                  else if (a == 32'h8000_0000 && b == '1) r = a;
                  else r = 32'($signed(a) / $signed(b));
      ALU_DIVU:   r = (b == 0) ? '1 : a / b;
      ALU_REM:    if (b == 0) r = a;
                  else if (a == 32'h8000_0000 && b == '1) r = '0;
                  else r = 32'($signed(a) % $signed(b));
      ALU_REMU:   r = (b == 0) ? a : a % b;
      default:    r = '0;
    endcase
    return r;
  endfunction

  logic [31:0] a0, b0;

  always_comb begin
    for (int t = 0; t < NUM_THREADS; t++) begin
      if (dec.unit == EX_BR) result[t] = pc + 32'd4;
      else result[t] = alu(dec.alu_op, rs1_data[t], dec.use_imm ? dec.imm : rs2_data[t], pc);
    end

    // branch operands: the lowest active thread
    a0 = rs1_data[0];
    b0 = rs2_data[0];
    for (int t = NUM_THREADS - 1; t >= 0; t--)
      if (tmask[t]) begin a0 = rs1_data[t]; b0 = rs2_data[t]; end

    unique case (dec.br_op)
      BR_EQ:   br_taken = (a0 == b0);
      BR_NE:   br_taken = (a0 != b0);
      BR_LT:   br_taken = ($signed(a0) <  $signed(b0));
      BR_GE:   br_taken = ($signed(a0) >= $signed(b0));
      BR_LTU:  br_taken = (a0 <  b0);
      BR_GEU:  br_taken = (a0 >= b0);
      default: br_taken = 1'b1;   // JAL, JALR
    endcase
    if (dec.unit != EX_BR) br_taken = 1'b0;

    if (dec.unit == EX_BR && dec.br_op == BR_JALR) next_pc = (a0 + dec.imm) & ~32'd1;
    else if (br_taken)                             next_pc = pc + dec.imm;
    else                                           next_pc = pc + 32'd4;
  end

endmodule
