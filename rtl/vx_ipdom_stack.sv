// vx_ipdom_stack: one warp's IPDOM (immediate post-dominator) stack.
//
// Each entry holds {fall-through flag, PC, thread mask}, the three fields the
// paper's microarchitecture figure shows. A divergent split pushes two entries
// in one cycle: first the fall-through entry (the warp's thread mask before the
// split), then the entry of the threads whose predicate was false, with the PC
// after the split. A split whose threads all agree pushes only a fall-through
// entry with the unchanged mask (push_ft), so that its join still finds an
// entry to pop. A join pops one entry. The top entry, and whether the stack
// is empty or full, are visible combinationally.
//
// Depth: the paper only says the number of entries grows with the thread
// count. At most NUM_THREADS-1 divergent splits can nest (each needs two
// disagreeing active threads), two entries each, so DEPTH = 2*NUM_THREADS is
// enough for divergent splits; each uniform split nested inside them takes one
// more entry, so very deep nesting of uniform splits can overflow. That bound
// is this design's. Pushing into a full stack or popping an
// empty one is ignored and flagged by an assertion.
module vx_ipdom_stack #(
  parameter int NUM_THREADS = vx_pkg::NUM_THREADS,
  parameter int DEPTH       = 2 * NUM_THREADS,
  localparam int SPW        = $clog2(DEPTH + 1),
  localparam int IW         = $clog2(DEPTH)
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   push,
  input  logic                   push_ft,        // uniform split: fall-through entry only
  input  logic [NUM_THREADS-1:0] push_ft_mask,   // fall-through entry: mask before the split
  input  logic [31:0]            push_pc,        // not-taken entry: PC after the split
  input  logic [NUM_THREADS-1:0] push_mask,      // not-taken entry: threads with false predicate
  input  logic                   pop,
  output logic                   top_fall_through,
  output logic [31:0]            top_pc,
  output logic [NUM_THREADS-1:0] top_mask,
  output logic                   empty,
  output logic                   full
);

  logic                   ft_q   [DEPTH];
  logic [31:0]            pc_q   [DEPTH];
  logic [NUM_THREADS-1:0] mask_q [DEPTH];
  logic [SPW-1:0]         sp_q;   // number of entries
  logic [IW-1:0]          top_i, wr0_i, wr1_i;

  assign top_i = IW'(sp_q - SPW'(1));
  assign wr0_i = IW'(sp_q);
  assign wr1_i = IW'(sp_q + SPW'(1));

  assign empty = (sp_q == '0);
  assign full  = (int'(sp_q) > DEPTH - 2);   // no room for two entries

  always_comb begin
    top_fall_through = 1'b0;
    top_pc           = '0;
    top_mask         = '0;
    if (!empty) begin
      top_fall_through = ft_q[top_i];
      top_pc           = pc_q[top_i];
      top_mask         = mask_q[top_i];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      sp_q <= '0;
    end else if (push && !full) begin
      ft_q[wr0_i]   <= 1'b1;
      pc_q[wr0_i]   <= '0;
      mask_q[wr0_i] <= push_ft_mask;
      ft_q[wr1_i]   <= 1'b0;
      pc_q[wr1_i]   <= push_pc;
      mask_q[wr1_i] <= push_mask;
      sp_q          <= sp_q + SPW'(2);
    end else if (push_ft && int'(sp_q) < DEPTH) begin
      ft_q[wr0_i]   <= 1'b1;
      pc_q[wr0_i]   <= '0;
      mask_q[wr0_i] <= push_ft_mask;
      sp_q          <= sp_q + SPW'(1);
    end else if (pop && !empty) begin
      sp_q <= sp_q - SPW'(1);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (rst) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) pop |-> !empty);
  a_one_op:       assert property (@(posedge clk) disable iff (rst) !(push && pop) && !(push_ft && pop));
  a_no_overflow1: assert property (@(posedge clk) disable iff (rst) push_ft |-> int'(sp_q) < DEPTH);

endmodule
