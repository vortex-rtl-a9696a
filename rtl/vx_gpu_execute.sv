// vx_gpu_execute: the "GPU execute" unit for the five SIMT instructions.
//
// Combinational. From the decoded instruction, the warp's PC and thread mask,
// the register operands and the top of the warp's IPDOM stack, it works out
// the warp's new state and the requests to the other blocks:
//  * tmc numT   : thread mask = lowest numT threads; zero deactivates the warp.
//  * wspawn n,pc: spawn request to the scheduler (warps 1..n-1 at pc).
//  * split pred : if the active threads disagree on pred (rs1 != 0), push the
//                 fall-through entry (old mask) and the not-taken entry
//                 (PC+4, false threads), and keep only the true threads;
//                 otherwise the mask and PC stay and only a fall-through
//                 entry is pushed (ipdom_push_ft), so the matching join
//                 restores the same mask. The paper calls a uniform split a
//                 no-op, but also has every join pop an entry; this design
//                 keeps the join/split pairing intact.
//  * join       : pop one entry; a not-taken entry sends the warp to its PC
//                 with its mask, a fall-through entry restores the mask and
//                 continues at PC+4. A join on an empty stack is a no-op.
//  * bar id,n   : barrier request. The MSB of id selects the global barrier
//                 (bar_global, with the unclamped count on bar_count, for a
//                 table outside the core); otherwise the local barrier table.
// Scalar operands (numT, n, pc, id) come from the lowest active thread.
// The split/join behaviour is the published one; operand slots of tmc, wspawn
// and bar and the empty-stack rule are this design's choices.
module vx_gpu_execute
  import vx_pkg::*;
#(
  parameter int NUM_WARPS    = vx_pkg::NUM_WARPS,
  parameter int NUM_THREADS  = vx_pkg::NUM_THREADS,
  parameter int NUM_BARRIERS = vx_pkg::NUM_BARRIERS,
  localparam int WIDW        = $clog2(NUM_WARPS),
  localparam int WIDB        = $clog2(NUM_BARRIERS)
) (
  input  decoded_t                     dec,
  input  logic                         valid,
  input  logic [31:0]                  pc,
  input  logic [NUM_THREADS-1:0]       tmask,
  input  logic [NUM_THREADS-1:0][31:0] rs1_data,
  input  logic [NUM_THREADS-1:0][31:0] rs2_data,
  input  logic                         ipdom_empty,
  input  logic                         ipdom_top_ft,
  input  logic [31:0]                  ipdom_top_pc,
  input  logic [NUM_THREADS-1:0]       ipdom_top_mask,

  output logic [31:0]                  next_pc,
  output logic                         tmask_we,
  output logic [NUM_THREADS-1:0]       new_tmask,
  output logic                         ipdom_push,
  output logic                         ipdom_push_ft,
  output logic [NUM_THREADS-1:0]       ipdom_push_ft_mask,
  output logic [31:0]                  ipdom_push_pc,
  output logic [NUM_THREADS-1:0]       ipdom_push_mask,
  output logic                         ipdom_pop,
  output logic                         spawn_valid,
  output logic [WIDW:0]                spawn_num,
  output logic [31:0]                  spawn_pc,
  output logic                         bar_valid,
  output logic [WIDB-1:0]              bar_id,
  output logic [WIDW:0]                bar_num,
  output logic                         bar_global,
  output logic [31:0]                  bar_count,
  output logic [30:0]                  bar_global_id,
  output logic                         diverged
);

  logic [31:0]            s1, s2;
  logic [NUM_THREADS-1:0] pred, taken, not_taken;

  always_comb begin
    s1 = rs1_data[0];
    s2 = rs2_data[0];
    for (int t = NUM_THREADS - 1; t >= 0; t--)
      if (tmask[t]) begin s1 = rs1_data[t]; s2 = rs2_data[t]; end
    for (int t = 0; t < NUM_THREADS; t++) pred[t] = (rs1_data[t] != 32'd0);
    taken     = tmask & pred;
    not_taken = tmask & ~pred;

    next_pc            = pc + 32'd4;
    tmask_we           = 1'b0;
    new_tmask          = tmask;
    ipdom_push         = 1'b0;
    ipdom_push_ft      = 1'b0;
    ipdom_push_ft_mask = tmask;
    ipdom_push_pc      = pc + 32'd4;
    ipdom_push_mask    = not_taken;
    ipdom_pop          = 1'b0;
    spawn_valid        = 1'b0;
    spawn_num          = (s1 > 32'(NUM_WARPS)) ? (WIDW+1)'(NUM_WARPS) : (WIDW+1)'(s1);
    spawn_pc           = s2;
    bar_valid          = 1'b0;
    bar_id             = s1[WIDB-1:0];
    bar_num            = (s2 > 32'(NUM_WARPS)) ? (WIDW+1)'(NUM_WARPS) : (WIDW+1)'(s2);
    bar_global         = s1[31];
    bar_count          = s2;
    bar_global_id      = s1[30:0];
    diverged           = 1'b0;

    if (valid && dec.unit == EX_GPU) begin
      unique case (dec.gpu_op)
        GPU_TMC: begin
          tmask_we = 1'b1;
          for (int t = 0; t < NUM_THREADS; t++) new_tmask[t] = (32'(t) < s1);
        end
        GPU_WSPAWN: spawn_valid = 1'b1;
        GPU_SPLIT: begin
          if (taken != '0 && not_taken != '0) begin
            diverged   = 1'b1;
            ipdom_push = 1'b1;
            tmask_we   = 1'b1;
            new_tmask  = taken;
          end else begin
            ipdom_push_ft = 1'b1;
          end
        end
        GPU_JOIN: begin
          if (!ipdom_empty) begin
            ipdom_pop = 1'b1;
            tmask_we  = 1'b1;
            new_tmask = ipdom_top_mask;
            if (!ipdom_top_ft) next_pc = ipdom_top_pc;
          end
        end
        GPU_BAR: bar_valid = 1'b1;
        default: ;
      endcase
    end
  end

endmodule
