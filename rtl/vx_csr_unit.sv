// vx_csr_unit: identity and performance CSRs, read by csrr* instructions.
//
// The runtime queries its place in the machine (thread, warp and core ids,
// thread and warp counts) and reads performance counters through these
// registers; the paper names both groups ("ID query", "perf counters") but
// not their numbers, which are this design's choice (see vx_pkg). The cycle
// counter counts every clock after reset; the instruction counter counts the
// warp instructions the core reports as retired (instr_retired strobe). Reads
// are combinational and per lane (the thread id differs per lane); CSR writes
// are ignored. Unknown CSR numbers read zero.
module vx_csr_unit
  import vx_pkg::*;
#(
  parameter int          NUM_WARPS   = vx_pkg::NUM_WARPS,
  parameter int          NUM_THREADS = vx_pkg::NUM_THREADS,
  parameter logic [31:0] CORE_ID     = 32'd0,
  parameter int          NUM_CORES   = 1,
  localparam int         WIDW        = $clog2(NUM_WARPS)
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         instr_retired,
  input  logic [11:0]                  csr,
  input  logic [WIDW-1:0]              wid,
  output logic [NUM_THREADS-1:0][31:0] rdata,
  output logic [63:0]                  cycles,
  output logic [63:0]                  instrs
);

  logic [63:0] cycle_q, instr_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      cycle_q <= '0;
      instr_q <= '0;
    end else begin
      cycle_q <= cycle_q + 64'd1;
      if (instr_retired) instr_q <= instr_q + 64'd1;
    end
  end

  assign cycles = cycle_q;
  assign instrs = instr_q;

  always_comb begin
    for (int t = 0; t < NUM_THREADS; t++) begin
      unique case (csr)
        CSR_TID:    rdata[t] = 32'(t);
        CSR_WID:    rdata[t] = 32'(wid);
        CSR_CID:    rdata[t] = CORE_ID;
        CSR_NT:     rdata[t] = 32'(NUM_THREADS);
        CSR_NW:     rdata[t] = 32'(NUM_WARPS);
        CSR_NC:     rdata[t] = 32'(NUM_CORES);
        CSR_CYCLE:  rdata[t] = cycle_q[31:0];
        CSR_CYCLEH: rdata[t] = cycle_q[63:32];
        CSR_INSTR:  rdata[t] = instr_q[31:0];
        CSR_INSTRH: rdata[t] = instr_q[63:32];
        default:    rdata[t] = '0;
      endcase
    end
  end

endmodule
