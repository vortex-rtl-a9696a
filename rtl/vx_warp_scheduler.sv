// vx_warp_scheduler: warp masks, warp table and warp selection (fetch stage).
//
// State, as in the published design: an active-warps mask, a stalled-warps
// mask (a warp waits for its state-changing instruction to execute), a
// barrier-warps mask (a warp waits at a barrier), a visible-warps mask for the
// two-level scheduling policy, and a warp table holding each warp's PC and
// thread mask. Each cycle the scheduler takes the lowest-numbered warp that is
// still visible and schedulable, sends its PC to the I-cache and clears its
// visible bit. When no visible warp is left, the visible mask is refilled with
// active & ~stalled & ~barrier in the same cycle (Fig. 5 of the paper prints
// these mask values, bit 0 = warp 0).
//
// Interface (all single-cycle strobes, synchronous to clk):
//  * sched_*  : the selected warp; it is consumed when sched_ready is high,
//               which also advances that warp's PC by 4.
//  * stall_*  : decode saw a state-changing instruction; the warp is taken out
//               of scheduling in the same cycle and its fetch epoch increments
//               so instructions fetched behind it can be dropped.
//  * resolve_*: execute finished that instruction; sets the warp's PC, maybe its
//               thread mask (a zero mask deactivates the warp) and unstalls it.
//  * spawn_*  : wspawn; warps 1..num-1 become active (newly active ones start
//               at spawn_pc with thread 0 only), warps >= num are deactivated.
//  * bar_*    : a warp enters a barrier; release_mask lets warps leave it.
// Reset starts warp 0 alone at START_PC with thread 0 only; the choice of
// lowest-index priority, the reset state and the epoch are this design's.
module vx_warp_scheduler #(
  parameter int          NUM_WARPS   = vx_pkg::NUM_WARPS,
  parameter int          NUM_THREADS = vx_pkg::NUM_THREADS,
  parameter logic [31:0] START_PC    = vx_pkg::START_PC,
  localparam int         WIDW        = $clog2(NUM_WARPS)
) (
  input  logic                   clk,
  input  logic                   rst,

  output logic                   sched_valid,
  input  logic                   sched_ready,
  output logic [WIDW-1:0]        sched_wid,
  output logic [31:0]            sched_pc,
  output logic [NUM_THREADS-1:0] sched_tmask,
  output logic [1:0]             sched_epoch,

  input  logic                   stall_valid,
  input  logic [WIDW-1:0]        stall_wid,

  input  logic                   resolve_valid,
  input  logic [WIDW-1:0]        resolve_wid,
  input  logic [31:0]            resolve_pc,
  input  logic                   resolve_tmask_we,
  input  logic [NUM_THREADS-1:0] resolve_tmask,

  input  logic                   spawn_valid,
  input  logic [WIDW:0]          spawn_num,
  input  logic [31:0]            spawn_pc,

  input  logic                   bar_valid,
  input  logic [WIDW-1:0]        bar_wid,
  input  logic                   release_valid,
  input  logic [NUM_WARPS-1:0]   release_mask,

  output logic [1:0]             epoch [NUM_WARPS],
  output logic [NUM_WARPS-1:0]   active_mask,
  output logic [NUM_WARPS-1:0]   stalled_mask,
  output logic [NUM_WARPS-1:0]   barrier_mask,
  output logic [NUM_WARPS-1:0]   visible_mask    // effective visible mask of this cycle
);

  logic [NUM_WARPS-1:0]   active_q, stalled_q, barrier_q, visible_q;
  logic [31:0]            pc_q    [NUM_WARPS];
  logic [NUM_THREADS-1:0] tmask_q [NUM_WARPS];
  logic [1:0]             epoch_q [NUM_WARPS];

  logic [NUM_WARPS-1:0] stall_now, ready_mask, vis;
  logic [WIDW-1:0]      sel;
  logic                 fire;

  always_comb begin
    stall_now = '0;
    if (stall_valid) stall_now[stall_wid] = 1'b1;
    ready_mask = active_q & ~stalled_q & ~barrier_q & ~stall_now;
    vis = visible_q & ready_mask;
    if (vis == '0) vis = ready_mask;
    sel = '0;
    for (int w = NUM_WARPS - 1; w >= 0; w--)
      if (vis[w]) sel = WIDW'(w);
  end

  assign sched_valid  = (vis != '0);
  assign sched_wid    = sel;
  assign sched_pc     = pc_q[sel];
  assign sched_tmask  = tmask_q[sel];
  assign sched_epoch  = epoch_q[sel];
  assign fire         = sched_valid && sched_ready;

  assign active_mask  = active_q;
  assign stalled_mask = stalled_q;
  assign barrier_mask = barrier_q;
  assign visible_mask = vis;
  assign epoch        = epoch_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      active_q  <= NUM_WARPS'(1);
      stalled_q <= '0;
      barrier_q <= '0;
      visible_q <= '0;
      for (int w = 0; w < NUM_WARPS; w++) begin
        pc_q[w]    <= START_PC;
        tmask_q[w] <= NUM_THREADS'(1);
        epoch_q[w] <= '0;
      end
    end else begin
      if (fire) begin
        visible_q   <= vis & ~(NUM_WARPS'(1) << sel);
        pc_q[sel]   <= pc_q[sel] + 32'd4;
      end
      if (stall_valid) begin
        stalled_q[stall_wid] <= 1'b1;
        epoch_q[stall_wid]   <= epoch_q[stall_wid] + 2'd1;
      end
      if (spawn_valid) begin
        for (int w = 1; w < NUM_WARPS; w++) begin
          if (w < int'(spawn_num)) begin
            if (!active_q[w]) begin
              active_q[w] <= 1'b1;
              pc_q[w]     <= spawn_pc;
              tmask_q[w]  <= NUM_THREADS'(1);
            end
          end else begin
            active_q[w] <= 1'b0;
          end
        end
      end
      if (resolve_valid) begin
        stalled_q[resolve_wid] <= 1'b0;
        pc_q[resolve_wid]      <= resolve_pc;
        if (resolve_tmask_we) begin
          tmask_q[resolve_wid] <= resolve_tmask;
          if (resolve_tmask == '0) active_q[resolve_wid] <= 1'b0;
        end
      end
      if (release_valid) barrier_q <= barrier_q & ~release_mask;
      if (bar_valid)     barrier_q[bar_wid] <= 1'b1;
    end
  end

  // a warp is only resolved while it is stalled
  a_resolve_stalled: assert property (@(posedge clk) disable iff (rst)
    resolve_valid |-> stalled_q[resolve_wid]);

endmodule
