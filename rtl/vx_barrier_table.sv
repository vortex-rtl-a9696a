// vx_barrier_table: per-core warp barrier table.
//
// One entry per barrier id with the three fields of the published design:
// valid, the number of warps still to arrive, and the release mask of warps
// stalled on it. When a warp executes `bar id, num`:
//  * if the entry is idle and num <= 1, nothing waits (the paper: the warp is
//    stalled only if the count is not one);
//  * if this is the last warp (entry valid and one warp left), the entry
//    releases its mask (release_valid/release_mask, same cycle) and goes idle;
//  * otherwise the warp is stalled (stall = 1), added to the mask, and the
//    warps-left count is set to num-1 (first arrival) or decremented.
// The caller puts a stalled warp into the scheduler's barrier mask.
// The paper also has a global table for multi-core parts, selected by the MSB of
// the barrier id; this single-core design has none and ignores that bit.
module vx_barrier_table #(
  parameter int NUM_WARPS    = vx_pkg::NUM_WARPS,
  parameter int NUM_BARRIERS = vx_pkg::NUM_BARRIERS,
  localparam int WIDW        = $clog2(NUM_WARPS),
  localparam int WIDB        = $clog2(NUM_BARRIERS)
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 bar_valid,
  input  logic [WIDB-1:0]      bar_id,
  input  logic [WIDW:0]        bar_num,
  input  logic [WIDW-1:0]      bar_wid,
  output logic                 stall,
  output logic                 release_valid,
  output logic [NUM_WARPS-1:0] release_mask
);

  logic                 valid_q [NUM_BARRIERS];
  logic [WIDW:0]        left_q  [NUM_BARRIERS];
  logic [NUM_WARPS-1:0] mask_q  [NUM_BARRIERS];

  logic last;

  always_comb begin
    last          = 1'b0;
    stall         = 1'b0;
    release_valid = 1'b0;
    release_mask  = '0;
    if (bar_valid) begin
      if (valid_q[bar_id]) last = (left_q[bar_id] == (WIDW+1)'(1));
      else                 last = (bar_num <= (WIDW+1)'(1));
      stall = !last;
      if (last && valid_q[bar_id]) begin
        release_valid = 1'b1;
        release_mask  = mask_q[bar_id];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int b = 0; b < NUM_BARRIERS; b++) begin
        valid_q[b] <= 1'b0;
        left_q[b]  <= '0;
        mask_q[b]  <= '0;
      end
    end else if (bar_valid) begin
      if (last) begin
        valid_q[bar_id] <= 1'b0;
        mask_q[bar_id]  <= '0;
        left_q[bar_id]  <= '0;
      end else if (!valid_q[bar_id]) begin
        valid_q[bar_id] <= 1'b1;
        left_q[bar_id]  <= bar_num - (WIDW+1)'(1);
        mask_q[bar_id]  <= NUM_WARPS'(1) << bar_wid;
      end else begin
        left_q[bar_id]  <= left_q[bar_id] - (WIDW+1)'(1);
        mask_q[bar_id]  <= mask_q[bar_id] | (NUM_WARPS'(1) << bar_wid);
      end
    end
  end

endmodule
