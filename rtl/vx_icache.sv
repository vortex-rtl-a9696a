// vx_icache: instruction cache, 1 KB, 2-way set associative, one bank.
//
// Holds 16-byte lines (32 sets x 2 ways at the default size) with one LRU bit
// per set. A fetch request (address plus an opaque tag the pipeline uses to
// remember the warp) is looked up in the cycle it is accepted; on a hit the
// instruction appears in the output register the next cycle (the paper notes
// the fetched instruction "is only known the next cycle"). On a miss the cache
// stops taking requests, reads the whole line over the memory port, fills the
// LRU way and then delivers the instruction. The output register holds until
// rsp_ready. Size, associativity and the single bank follow the paper; line
// size, LRU and the blocking miss are this design's choices.
//
// Memory port: one request at a time; a read returns a whole line on
// mem_rsp_data (word 0 in bits 31:0).
module vx_icache #(
  parameter int CACHE_BYTES = 1024,
  parameter int WAYS        = 2,
  parameter int LINE_BYTES  = 16,
  parameter int TAG_W       = 8,
  localparam int SETS       = CACHE_BYTES / (WAYS * LINE_BYTES),
  localparam int OFF_W      = $clog2(LINE_BYTES),
  localparam int IDX_W      = $clog2(SETS),
  localparam int TAGB_W     = 32 - OFF_W - IDX_W,
  localparam int LINE_W     = LINE_BYTES * 8
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [31:0]       req_addr,
  input  logic [TAG_W-1:0]  req_tag,
  output logic              rsp_valid,
  input  logic              rsp_ready,
  output logic [31:0]       rsp_data,
  output logic [31:0]       rsp_addr,
  output logic [TAG_W-1:0]  rsp_tag,
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [31:0]       mem_req_addr,
  input  logic              mem_rsp_valid,
  input  logic [LINE_W-1:0] mem_rsp_data,
  output logic              miss_event
);

  typedef enum logic [1:0] {S_IDLE, S_MREQ, S_MWAIT} state_e;
  state_e state_q;

  logic [LINE_W-1:0] data_q  [SETS][WAYS];
  logic [TAGB_W-1:0] tag_q   [SETS][WAYS];
  logic              valid_q [SETS][WAYS];
  logic              lru_q   [SETS];          // way to replace next (WAYS = 2)

  logic              out_valid_q;
  logic [31:0]       out_data_q, out_addr_q;
  logic [TAG_W-1:0]  out_tag_q;
  logic [31:0]       miss_addr_q;
  logic [TAG_W-1:0]  miss_tag_q;

  logic [IDX_W-1:0]  idx;
  logic [TAGB_W-1:0] tagb;
  logic              hit;
  logic              hit_way;
  logic              req_fire, rsp_fire;

  function automatic logic [31:0] word_of(logic [LINE_W-1:0] line, logic [31:0] addr);
    return line[32 * addr[OFF_W-1:2] +: 32];
  endfunction

  assign idx  = req_addr[OFF_W +: IDX_W];
  assign tagb = req_addr[31 -: TAGB_W];

  always_comb begin
    hit     = 1'b0;
    hit_way = 1'b0;
    for (int w = 0; w < WAYS; w++)
      if (valid_q[idx][w] && tag_q[idx][w] == tagb) begin hit = 1'b1; hit_way = 1'(w); end
  end

  assign req_ready = (state_q == S_IDLE) && (!out_valid_q || rsp_ready);
  assign req_fire  = req_valid && req_ready;
  assign rsp_fire  = out_valid_q && rsp_ready;
  assign rsp_valid = out_valid_q;
  assign rsp_data  = out_data_q;
  assign rsp_addr  = out_addr_q;
  assign rsp_tag   = out_tag_q;

  assign mem_req_valid = (state_q == S_MREQ);
  assign mem_req_addr  = {miss_addr_q[31:OFF_W], {OFF_W{1'b0}}};
  assign miss_event    = req_fire && !hit;

  logic [IDX_W-1:0] midx;
  assign midx = miss_addr_q[OFF_W +: IDX_W];

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q     <= S_IDLE;
      out_valid_q <= 1'b0;
      for (int s = 0; s < SETS; s++) begin
        lru_q[s] <= 1'b0;
        for (int w = 0; w < WAYS; w++) valid_q[s][w] <= 1'b0;
      end
    end else begin
      if (rsp_fire) out_valid_q <= 1'b0;
      unique case (state_q)
        S_IDLE: if (req_fire) begin
          if (hit) begin
            out_valid_q <= 1'b1;
            out_data_q  <= word_of(data_q[idx][hit_way], req_addr);
            out_addr_q  <= req_addr;
            out_tag_q   <= req_tag;
            lru_q[idx]  <= ~hit_way;
          end else begin
            miss_addr_q <= req_addr;
            miss_tag_q  <= req_tag;
            state_q     <= S_MREQ;
          end
        end
        S_MREQ: if (mem_req_ready) state_q <= S_MWAIT;
        S_MWAIT: if (mem_rsp_valid) begin
          data_q[midx][lru_q[midx]]  <= mem_rsp_data;
          tag_q[midx][lru_q[midx]]   <= miss_addr_q[31 -: TAGB_W];
          valid_q[midx][lru_q[midx]] <= 1'b1;
          lru_q[midx]                <= ~lru_q[midx];
          out_valid_q <= 1'b1;
          out_data_q  <= word_of(mem_rsp_data, miss_addr_q);
          out_addr_q  <= miss_addr_q;
          out_tag_q   <= miss_tag_q;
          state_q     <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (rst)
    rsp_valid && !rsp_ready |=> rsp_valid && $stable(rsp_data));

endmodule
