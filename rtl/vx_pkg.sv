// vx_pkg: constants and types shared by the Vortex core.
//
// Holds the default configuration (8 warps of 4 threads, the configuration
// that was laid out), the RISC-V opcodes of RV32IM, the encoding of the five
// SIMT instructions, and the decoded-instruction struct that travels down the
// pipeline. The split/join encodings (opcode 0x6B, funct3 2 and 3, operand in
// rs1) are the published ones; funct3 of tmc, wspawn and bar, the barrier
// count, the start PC, the shared-memory window and the CSR numbers are this
// design's own choices.
package vx_pkg;

  localparam int XLEN         = 32;
  localparam int NUM_WARPS    = 8;
  localparam int NUM_THREADS  = 4;
  localparam int NUM_BARRIERS = 4;
  localparam int NUM_REGS     = 32;

  localparam logic [31:0] START_PC  = 32'h8000_0000;
  localparam logic [31:0] SMEM_BASE = 32'hFF00_0000;

  // RV32 major opcodes
  localparam logic [6:0] OPC_LUI    = 7'b0110111;
  localparam logic [6:0] OPC_AUIPC  = 7'b0010111;
  localparam logic [6:0] OPC_JAL    = 7'b1101111;
  localparam logic [6:0] OPC_JALR   = 7'b1100111;
  localparam logic [6:0] OPC_BRANCH = 7'b1100011;
  localparam logic [6:0] OPC_LOAD   = 7'b0000011;
  localparam logic [6:0] OPC_STORE  = 7'b0100011;
  localparam logic [6:0] OPC_OPIMM  = 7'b0010011;
  localparam logic [6:0] OPC_OP     = 7'b0110011;
  localparam logic [6:0] OPC_FENCE  = 7'b0001111;
  localparam logic [6:0] OPC_SYSTEM = 7'b1110011;
  localparam logic [6:0] OPC_GPU    = 7'h6B;   // SIMT extension

  // funct3 of the SIMT extension
  localparam logic [2:0] F3_TMC    = 3'd0;
  localparam logic [2:0] F3_WSPAWN = 3'd1;
  localparam logic [2:0] F3_SPLIT  = 3'd2;
  localparam logic [2:0] F3_JOIN   = 3'd3;
  localparam logic [2:0] F3_BAR    = 3'd4;

  // CSR numbers (read only)
  localparam logic [11:0] CSR_TID     = 12'hCC0;
  localparam logic [11:0] CSR_WID     = 12'hCC1;
  localparam logic [11:0] CSR_CID     = 12'hCC2;
  localparam logic [11:0] CSR_NT      = 12'hFC0;
  localparam logic [11:0] CSR_NW      = 12'hFC1;
  localparam logic [11:0] CSR_NC      = 12'hFC2;
  localparam logic [11:0] CSR_CYCLE   = 12'hC00;
  localparam logic [11:0] CSR_CYCLEH  = 12'hC80;
  localparam logic [11:0] CSR_INSTR   = 12'hC02;
  localparam logic [11:0] CSR_INSTRH  = 12'hC82;

  typedef enum logic [2:0] {
    EX_ALU = 3'd0,
    EX_BR  = 3'd1,
    EX_LSU = 3'd2,
    EX_CSR = 3'd3,
    EX_GPU = 3'd4,
    EX_NOP = 3'd5
  } ex_unit_e;

  typedef enum logic [4:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU, ALU_XOR, ALU_SRL, ALU_SRA,
    ALU_OR, ALU_AND, ALU_LUI, ALU_AUIPC,
    ALU_MUL, ALU_MULH, ALU_MULHSU, ALU_MULHU,
    ALU_DIV, ALU_DIVU, ALU_REM, ALU_REMU
  } alu_op_e;

  typedef enum logic [3:0] {
    BR_EQ, BR_NE, BR_LT, BR_GE, BR_LTU, BR_GEU, BR_JAL, BR_JALR
  } br_op_e;

  typedef enum logic [2:0] {
    GPU_TMC, GPU_WSPAWN, GPU_SPLIT, GPU_JOIN, GPU_BAR
  } gpu_op_e;

  typedef struct packed {
    ex_unit_e    unit;
    alu_op_e     alu_op;
    br_op_e      br_op;
    gpu_op_e     gpu_op;
    logic        is_load;
    logic        is_store;
    logic [2:0]  mem_f3;     // size and sign of a load or store
    logic        use_imm;    // ALU operand B is the immediate
    logic        use_rs1;
    logic        use_rs2;
    logic        wb;         // writes rd
    logic        is_ctl;     // changes warp state: the warp is stalled until execute
    logic        illegal;
    logic [4:0]  rd;
    logic [4:0]  rs1;
    logic [4:0]  rs2;
    logic [31:0] imm;
    logic [11:0] csr;
  } decoded_t;

  // one strobe per pipeline mechanism, brought out of the core for
  // performance counting
  typedef struct packed {
    logic warp_stall;       // decode stalled a warp (state-changing instruction)
    logic fetch_drop;       // an instruction fetched behind a stalled warp was dropped
    logic sb_hazard;        // issue held by the scoreboard
    logic split_diverge;    // a split pushed the IPDOM stack
    logic split_uniform;    // a split whose threads agreed (no-op)
    logic join_pop;         // a join popped the IPDOM stack
    logic wspawn;           // warps spawned
    logic tmc;              // thread mask changed
    logic bar_stall;        // a warp waits at a barrier
    logic bar_release;      // a barrier released its warps
    logic branch_taken;     // a branch or jump redirected a warp
    logic icache_miss;
    logic dcache_miss;
    logic dcache_conflict;  // data-cache bank conflict cycle
    logic smem_conflict;    // shared-memory bank conflict cycle
    logic lsu_wait;         // execute held by the LSU
  } vx_events_t;

endpackage
