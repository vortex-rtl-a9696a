// tb_vx_decoder: checks the decoder on hand-written encodings.
//
// Covers the two SIMT encodings printed in the runtime listing (0x0005206b =
// split a0, 0x0000306b = join), the other three SIMT instructions, and a
// sample of RV32IM: ALU with immediate, register ALU, M extension, loads,
// stores, branches, jumps, LUI, CSR reads and an illegal opcode. Expected
// fields were worked out by hand from the RISC-V instruction formats.
module tb_vx_decoder;
  import vx_pkg::*;

  logic [31:0] instr;
  decoded_t    dec;
  int checks = 0, failures = 0;

  vx_decoder dut (.instr, .dec);

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got 0x%0h expected 0x%0h", what, got, exp);
    end
  endtask

  initial begin
    #1;
    // split a0
    instr = 32'h0005206b; #1;
    chk("split unit", 32'(dec.unit), 32'(EX_GPU));
    chk("split op", 32'(dec.gpu_op), 32'(GPU_SPLIT));
    chk("split rs1", 32'(dec.rs1), 10);
    chk("split use_rs1", 32'(dec.use_rs1), 1);
    chk("split ctl", 32'(dec.is_ctl), 1);
    chk("split wb", 32'(dec.wb), 0);
    // join
    instr = 32'h0000306b; #1;
    chk("join op", 32'(dec.gpu_op), 32'(GPU_JOIN));
    chk("join ctl", 32'(dec.is_ctl), 1);
    chk("join use_rs1", 32'(dec.use_rs1), 0);
    // tmc a0 (funct3 0), wspawn a0,a1 (1), bar a0,a1 (4)
    instr = 32'h0005006b; #1;
    chk("tmc op", 32'(dec.gpu_op), 32'(GPU_TMC));
    instr = 32'h00b5106b; #1;
    chk("wspawn op", 32'(dec.gpu_op), 32'(GPU_WSPAWN));
    chk("wspawn rs2", 32'(dec.rs2), 11);
    chk("wspawn use_rs2", 32'(dec.use_rs2), 1);
    instr = 32'h00b5406b; #1;
    chk("bar op", 32'(dec.gpu_op), 32'(GPU_BAR));
    instr = 32'h0000706b; #1;   // funct3 7: not defined
    chk("gpu illegal", 32'(dec.illegal), 1);
    chk("gpu illegal unit", 32'(dec.unit), 32'(EX_NOP));
    // addi a0, a1, -5 : imm=0xffb rs1=11 f3=0 rd=10
    instr = 32'hffb58513; #1;
    chk("addi unit", 32'(dec.unit), 32'(EX_ALU));
    chk("addi op", 32'(dec.alu_op), 32'(ALU_ADD));
    chk("addi imm", dec.imm, 32'hffff_fffb);
    chk("addi rd", 32'(dec.rd), 10);
    chk("addi rs1", 32'(dec.rs1), 11);
    chk("addi use_imm", 32'(dec.use_imm), 1);
    chk("addi wb", 32'(dec.wb), 1);
    chk("addi ctl", 32'(dec.is_ctl), 0);
    // sub a0, a1, a2 = 0x40c58533
    instr = 32'h40c58533; #1;
    chk("sub op", 32'(dec.alu_op), 32'(ALU_SUB));
    chk("sub rs2", 32'(dec.rs2), 12);
    chk("sub use_imm", 32'(dec.use_imm), 0);
    // srai a0, a0, 3 = 0x40355513
    instr = 32'h40355513; #1;
    chk("srai op", 32'(dec.alu_op), 32'(ALU_SRA));
    // mulhu a0, a1, a2 = 0x02c5b533 ; rem = f3 6 -> 0x02c5e533
    instr = 32'h02c5b533; #1;
    chk("mulhu op", 32'(dec.alu_op), 32'(ALU_MULHU));
    instr = 32'h02c5e533; #1;
    chk("rem op", 32'(dec.alu_op), 32'(ALU_REM));
    // lw a0, 8(a1) = 0x0085a503
    instr = 32'h0085a503; #1;
    chk("lw unit", 32'(dec.unit), 32'(EX_LSU));
    chk("lw load", 32'(dec.is_load), 1);
    chk("lw imm", dec.imm, 8);
    chk("lw f3", 32'(dec.mem_f3), 2);
    // sw a2, -4(a1) = 0xfec5ae23
    instr = 32'hfec5ae23; #1;
    chk("sw store", 32'(dec.is_store), 1);
    chk("sw imm", dec.imm, 32'hffff_fffc);
    chk("sw wb", 32'(dec.wb), 0);
    chk("sw rs2", 32'(dec.rs2), 12);
    // beq a0, zero, -8 = 0xfe050ce3
    instr = 32'hfe050ce3; #1;
    chk("beq unit", 32'(dec.unit), 32'(EX_BR));
    chk("beq op", 32'(dec.br_op), 32'(BR_EQ));
    chk("beq imm", dec.imm, 32'hffff_fff8);
    chk("beq ctl", 32'(dec.is_ctl), 1);
    // jal ra, 2048 = 0x001000ef
    instr = 32'h001000ef; #1;
    chk("jal op", 32'(dec.br_op), 32'(BR_JAL));
    chk("jal imm", dec.imm, 2048);
    chk("jal wb", 32'(dec.wb), 1);
    // jalr zero, 0(ra) = 0x00008067 : rd 0 so no write
    instr = 32'h00008067; #1;
    chk("jalr op", 32'(dec.br_op), 32'(BR_JALR));
    chk("jalr wb", 32'(dec.wb), 0);
    // lui a0, 0x12345 = 0x12345537
    instr = 32'h12345537; #1;
    chk("lui op", 32'(dec.alu_op), 32'(ALU_LUI));
    chk("lui imm", dec.imm, 32'h1234_5000);
    // csrr a0, 0xcc0 = 0xcc002573
    instr = 32'hcc002573; #1;
    chk("csr unit", 32'(dec.unit), 32'(EX_CSR));
    chk("csr addr", 32'(dec.csr), 32'hcc0);
    chk("csr wb", 32'(dec.wb), 1);
    // illegal opcode
    instr = 32'h0000007f; #1;
    chk("illegal", 32'(dec.illegal), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
