// vx_decoder: instruction decoder of the Vortex pipeline.
//
// Purely combinational. Turns one 32-bit instruction into a decoded_t: which
// execute unit takes it (ALU, branch, LSU, CSR, GPU), the operation, register
// numbers, which operands are read, whether rd is written, and the sign- or
// zero-extended immediate. It covers RV32I and the M extension, plus the SIMT
// extension on opcode 0x6B: tmc (funct3 0, rs1 = thread count), wspawn
// (1, rs1 = warp count, rs2 = PC), split (2, rs1 = predicate), join (3) and
// bar (4, rs1 = barrier id, rs2 = warp count).
//
// is_ctl marks instructions after which the fetch stage must not run ahead of
// the warp: the five SIMT instructions (they change the warp's thread mask or
// the set of active warps, as in the published design) and, by this design's
// choice, branches and jumps, whose target is known only in execute.
// FENCE, ECALL and EBREAK decode to no-ops; unknown encodings set `illegal` and
// also behave as no-ops.
module vx_decoder
  import vx_pkg::*;
(
  input  logic [31:0] instr,
  output decoded_t    dec
);

  logic [6:0] opc;
  logic [2:0] f3;
  logic [6:0] f7;

  assign opc = instr[6:0];
  assign f3  = instr[14:12];
  assign f7  = instr[31:25];

  always_comb begin
    dec          = '0;
    dec.unit     = EX_NOP;
    dec.alu_op   = ALU_ADD;
    dec.br_op    = BR_EQ;
    dec.gpu_op   = GPU_TMC;
    dec.rd       = instr[11:7];
    dec.rs1      = instr[19:15];
    dec.rs2      = instr[24:20];
    dec.mem_f3   = f3;
    dec.csr      = instr[31:20];

    unique case (opc)
      OPC_LUI: begin
        dec.unit = EX_ALU; dec.alu_op = ALU_LUI; dec.wb = 1'b1; dec.use_imm = 1'b1;
        dec.imm  = {instr[31:12], 12'b0};
      end
      OPC_AUIPC: begin
        dec.unit = EX_ALU; dec.alu_op = ALU_AUIPC; dec.wb = 1'b1; dec.use_imm = 1'b1;
        dec.imm  = {instr[31:12], 12'b0};
      end
      OPC_JAL: begin
        dec.unit = EX_BR; dec.br_op = BR_JAL; dec.wb = 1'b1; dec.is_ctl = 1'b1;
        dec.imm  = {{12{instr[31]}}, instr[19:12], instr[20], instr[30:21], 1'b0};
      end
      OPC_JALR: begin
        dec.unit = EX_BR; dec.br_op = BR_JALR; dec.wb = 1'b1; dec.is_ctl = 1'b1;
        dec.use_rs1 = 1'b1;
        dec.imm  = {{20{instr[31]}}, instr[31:20]};
      end
      OPC_BRANCH: begin
        dec.unit = EX_BR; dec.is_ctl = 1'b1; dec.use_rs1 = 1'b1; dec.use_rs2 = 1'b1;
        dec.imm  = {{20{instr[31]}}, instr[7], instr[30:25], instr[11:8], 1'b0};
        unique case (f3)
          3'b000: dec.br_op = BR_EQ;
          3'b001: dec.br_op = BR_NE;
          3'b100: dec.br_op = BR_LT;
          3'b101: dec.br_op = BR_GE;
          3'b110: dec.br_op = BR_LTU;
          3'b111: dec.br_op = BR_GEU;
          default: begin dec.unit = EX_NOP; dec.is_ctl = 1'b0; dec.illegal = 1'b1; end
        endcase
      end
      OPC_LOAD: begin
        dec.unit = EX_LSU; dec.is_load = 1'b1; dec.wb = 1'b1; dec.use_rs1 = 1'b1;
        dec.imm  = {{20{instr[31]}}, instr[31:20]};
      end
      OPC_STORE: begin
        dec.unit = EX_LSU; dec.is_store = 1'b1; dec.use_rs1 = 1'b1; dec.use_rs2 = 1'b1;
        dec.imm  = {{20{instr[31]}}, instr[31:25], instr[11:7]};
      end
      OPC_OPIMM: begin
        dec.unit = EX_ALU; dec.wb = 1'b1; dec.use_rs1 = 1'b1; dec.use_imm = 1'b1;
        dec.imm  = {{20{instr[31]}}, instr[31:20]};
        unique case (f3)
          3'b000: dec.alu_op = ALU_ADD;
          3'b010: dec.alu_op = ALU_SLT;
          3'b011: dec.alu_op = ALU_SLTU;
          3'b100: dec.alu_op = ALU_XOR;
          3'b110: dec.alu_op = ALU_OR;
          3'b111: dec.alu_op = ALU_AND;
          3'b001: dec.alu_op = ALU_SLL;
          default: dec.alu_op = instr[30] ? ALU_SRA : ALU_SRL;
        endcase
      end
      OPC_OP: begin
        dec.unit = EX_ALU; dec.wb = 1'b1; dec.use_rs1 = 1'b1; dec.use_rs2 = 1'b1;
        if (f7 == 7'b0000001) begin
          unique case (f3)
            3'b000: dec.alu_op = ALU_MUL;
            3'b001: dec.alu_op = ALU_MULH;
            3'b010: dec.alu_op = ALU_MULHSU;
            3'b011: dec.alu_op = ALU_MULHU;
            3'b100: dec.alu_op = ALU_DIV;
            3'b101: dec.alu_op = ALU_DIVU;
            3'b110: dec.alu_op = ALU_REM;
            default: dec.alu_op = ALU_REMU;
          endcase
        end else begin
          unique case (f3)
            3'b000: dec.alu_op = instr[30] ? ALU_SUB : ALU_ADD;
            3'b001: dec.alu_op = ALU_SLL;
            3'b010: dec.alu_op = ALU_SLT;
            3'b011: dec.alu_op = ALU_SLTU;
            3'b100: dec.alu_op = ALU_XOR;
            3'b101: dec.alu_op = instr[30] ? ALU_SRA : ALU_SRL;
            3'b110: dec.alu_op = ALU_OR;
            default: dec.alu_op = ALU_AND;
          endcase
        end
      end
      OPC_SYSTEM: begin
        // csrr* read the CSR into rd; writes to CSRs are ignored
        if (f3 != 3'b000) begin
          dec.unit = EX_CSR; dec.wb = 1'b1;
        end
      end
      OPC_FENCE: dec.unit = EX_NOP;
      OPC_GPU: begin
        dec.unit   = EX_GPU;
        dec.is_ctl = 1'b1;
        unique case (f3)
          F3_TMC:    begin dec.gpu_op = GPU_TMC;    dec.use_rs1 = 1'b1; end
          F3_WSPAWN: begin dec.gpu_op = GPU_WSPAWN; dec.use_rs1 = 1'b1; dec.use_rs2 = 1'b1; end
          F3_SPLIT:  begin dec.gpu_op = GPU_SPLIT;  dec.use_rs1 = 1'b1; end
          F3_JOIN:   begin dec.gpu_op = GPU_JOIN; end
          F3_BAR:    begin dec.gpu_op = GPU_BAR;    dec.use_rs1 = 1'b1; dec.use_rs2 = 1'b1; end
          default:   begin dec.unit = EX_NOP; dec.is_ctl = 1'b0; dec.illegal = 1'b1; end
        endcase
      end
      default: dec.illegal = 1'b1;
    endcase

    // rd = x0 is never written, so it never holds a scoreboard entry
    if (dec.rd == 5'd0) dec.wb = 1'b0;
  end

endmodule
