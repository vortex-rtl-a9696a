// tb_vx_ipdom_stack: push/pop order and contents of one IPDOM stack.
//
// Replays two nested divergent splits, a uniform split and the joins that
// close them, comparing the top entry after each step with a reference stack
// kept in the testbench (a queue of {fall-through, pc, mask}). Also checks
// empty/full and that a push on a full stack is refused.
module tb_vx_ipdom_stack;
  localparam int NT = 4, DEPTH = 8;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic push = 0, push_ft = 0, pop = 0;
  logic [NT-1:0] push_ft_mask = 0, push_mask = 0;
  logic [31:0]   push_pc = 0;
  logic top_fall_through, empty, full;
  logic [31:0] top_pc;
  logic [NT-1:0] top_mask;

  vx_ipdom_stack #(.NUM_THREADS(NT), .DEPTH(DEPTH)) dut (.*);

  typedef struct { logic ft; logic [31:0] pc; logic [NT-1:0] mask; } ent_t;
  ent_t ref_q [$];
  int checks = 0, failures = 0;

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0h expected %0h", what, got, exp); end
  endtask

  task automatic compare(string tag);
    chk({tag, " empty"}, 32'(empty), 32'(ref_q.size() == 0));
    if (ref_q.size() > 0) begin
      chk({tag, " ft"},   32'(top_fall_through), 32'(ref_q[$].ft));
      chk({tag, " mask"}, 32'(top_mask),         32'(ref_q[$].mask));
      if (!ref_q[$].ft) chk({tag, " pc"}, top_pc, ref_q[$].pc);
    end
  endtask

  task automatic do_split(logic [NT-1:0] cur, logic [NT-1:0] nt, logic [31:0] pc);
    push = 1; push_ft_mask = cur; push_mask = nt; push_pc = pc;
    @(negedge clk); push = 0;
    ref_q.push_back('{1'b1, 32'h0, cur});
    ref_q.push_back('{1'b0, pc, nt});
  endtask
  task automatic do_uniform(logic [NT-1:0] cur);
    push_ft = 1; push_ft_mask = cur;
    @(negedge clk); push_ft = 0;
    ref_q.push_back('{1'b1, 32'h0, cur});
  endtask
  task automatic do_pop();
    pop = 1;
    @(negedge clk); pop = 0;
    void'(ref_q.pop_back());
  endtask

  initial begin
    @(negedge clk); @(negedge clk); rst = 0;
    compare("reset");
    do_split(4'b1111, 4'b1100, 32'h104);  compare("split1");
    do_split(4'b0011, 4'b0010, 32'h204);  compare("split2");
    do_uniform(4'b0001);                  compare("uniform");
    do_pop();                             compare("join uniform");
    do_pop();                             compare("join2 nt");
    do_pop();                             compare("join2 ft");
    do_pop();                             compare("join1 nt");
    do_pop();                             compare("join1 ft");
    // fill to the top
    do_split(4'b1111, 4'b0001, 32'h10);
    do_split(4'b1110, 4'b0010, 32'h20);
    do_split(4'b1100, 4'b0100, 32'h30);
    chk("not full at 6", 32'(full), 0);
    do_split(4'b1000, 4'b0000, 32'h40);
    compare("eight entries");
    chk("full", 32'(full), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000; failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
