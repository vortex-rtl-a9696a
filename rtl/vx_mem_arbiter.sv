// vx_mem_arbiter: shares the core's one external memory port between the
// data cache (client 0, higher priority) and the instruction cache (client 1).
//
// One request is outstanding at a time. In the idle state the arbiter grants
// the data cache if it asks, otherwise the instruction cache, and forwards
// that client's request; once the memory accepts it, the arbiter waits for the
// single response (read data, or the write acknowledge) and hands it to the
// client that asked. Reads return a whole line. The paper does not show how
// the caches reach memory; this arbiter is this design's own.
module vx_mem_arbiter #(
  parameter int LINE_W = 128
) (
  input  logic              clk,
  input  logic              rst,
  // client 0: data cache
  input  logic              c0_req_valid,
  output logic              c0_req_ready,
  input  logic              c0_req_rw,
  input  logic [31:0]       c0_req_addr,
  input  logic [31:0]       c0_req_wdata,
  input  logic [3:0]        c0_req_byteen,
  output logic              c0_rsp_valid,
  // client 1: instruction cache (reads only)
  input  logic              c1_req_valid,
  output logic              c1_req_ready,
  input  logic [31:0]       c1_req_addr,
  output logic              c1_rsp_valid,
  // shared response data
  output logic [LINE_W-1:0] rsp_data,
  // memory
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_rw,
  output logic [31:0]       mem_req_addr,
  output logic [31:0]       mem_req_wdata,
  output logic [3:0]        mem_req_byteen,
  input  logic              mem_rsp_valid,
  input  logic [LINE_W-1:0] mem_rsp_data
);

  typedef enum logic [1:0] {S_IDLE, S_WAIT0, S_WAIT1} state_e;
  state_e state_q;
  logic   grant0;

  assign grant0         = c0_req_valid;
  assign mem_req_valid  = (state_q == S_IDLE) && (c0_req_valid || c1_req_valid);
  assign mem_req_rw     = grant0 ? c0_req_rw : 1'b0;
  assign mem_req_addr   = grant0 ? c0_req_addr : c1_req_addr;
  assign mem_req_wdata  = c0_req_wdata;
  assign mem_req_byteen = grant0 ? c0_req_byteen : 4'b0000;
  assign c0_req_ready   = (state_q == S_IDLE) && mem_req_ready;
  assign c1_req_ready   = (state_q == S_IDLE) && mem_req_ready && !c0_req_valid;
  assign c0_rsp_valid   = (state_q == S_WAIT0) && mem_rsp_valid;
  assign c1_rsp_valid   = (state_q == S_WAIT1) && mem_rsp_valid;
  assign rsp_data       = mem_rsp_data;

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q <= S_IDLE;
    end else begin
      unique case (state_q)
        S_IDLE:  if (mem_req_valid && mem_req_ready) state_q <= grant0 ? S_WAIT0 : S_WAIT1;
        default: if (mem_rsp_valid) state_q <= S_IDLE;
      endcase
    end
  end

  a_rsp_owned: assert property (@(posedge clk) disable iff (rst)
    mem_rsp_valid |-> state_q != S_IDLE);

endmodule
