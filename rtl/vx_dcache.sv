// vx_dcache: banked data cache, 4 KB, 2-way set associative, 4 banks.
//
// Serves one warp memory instruction at a time: a vector of NUM_THREADS lane
// requests (address, write data, byte enables, lane mask). Lines are 16 bytes
// and consecutive lines go to consecutive banks (bank = line address mod 4);
// each bank is a 2-way cache of 32 sets with one LRU bit per set.
//
// Each cycle every bank takes the lowest-numbered pending lane that maps to it.
// A load that hits is served at once, so lanes in different banks complete in
// the same cycle; lanes that collide in one bank wait for later cycles (a bank
// conflict, counted on conflict_event). A load miss or a store takes the memory
// port: stores are write-through without allocation (a hit also updates the
// line), a load miss reads the whole line into the LRU way and the lane then
// hits. When every lane is done, rsp_valid pulses for one cycle with the load
// data of all lanes (lanes outside the mask return zero).
// Size, ways and banks follow the paper ("4KB 2 ways 4 banks"); line size, bank
// mapping, replacement, write policy and the one-lane-per-bank arbitration
// are this design's choices. WAYS must be 2 (one LRU bit per set).
module vx_dcache #(
  parameter int NUM_THREADS = vx_pkg::NUM_THREADS,
  parameter int CACHE_BYTES = 4096,
  parameter int WAYS        = 2,
  parameter int BANKS       = 4,
  parameter int LINE_BYTES  = 16,
  localparam int SETS       = CACHE_BYTES / (WAYS * LINE_BYTES * BANKS),
  localparam int OFF_W      = $clog2(LINE_BYTES),
  localparam int BANK_W     = $clog2(BANKS),
  localparam int IDX_W      = $clog2(SETS),
  localparam int TAGB_W     = 32 - OFF_W - BANK_W - IDX_W,
  localparam int LINE_W     = LINE_BYTES * 8
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         req_valid,
  output logic                         req_ready,
  input  logic                         req_rw,       // 1 = store
  input  logic [NUM_THREADS-1:0]       req_mask,
  input  logic [NUM_THREADS-1:0][31:0] req_addr,
  input  logic [NUM_THREADS-1:0][31:0] req_wdata,
  input  logic [NUM_THREADS-1:0][3:0]  req_byteen,
  output logic                         rsp_valid,
  output logic [NUM_THREADS-1:0][31:0] rsp_data,

  output logic                         mem_req_valid,
  input  logic                         mem_req_ready,
  output logic                         mem_req_rw,
  output logic [31:0]                  mem_req_addr,
  output logic [31:0]                  mem_req_wdata,
  output logic [3:0]                   mem_req_byteen,
  input  logic                         mem_rsp_valid,
  input  logic [LINE_W-1:0]            mem_rsp_data,

  output logic                         miss_event,
  output logic                         conflict_event
);

  typedef enum logic [1:0] {S_IDLE, S_BUSY, S_MREQ, S_MWAIT} state_e;
  state_e state_q;

  logic [LINE_W-1:0] data_q  [BANKS][SETS][WAYS];
  logic [TAGB_W-1:0] tag_q   [BANKS][SETS][WAYS];
  logic              valid_q [BANKS][SETS][WAYS];
  logic              lru_q   [BANKS][SETS];

  logic                         rw_q;
  logic [NUM_THREADS-1:0]       pend_q;
  logic [NUM_THREADS-1:0][31:0] addr_q, wdata_q, out_q;
  logic [NUM_THREADS-1:0][3:0]  be_q;
  localparam int LANE_W = (NUM_THREADS > 1) ? $clog2(NUM_THREADS) : 1;
  logic [LANE_W-1:0]            mlane_q;   // lane using the memory port
  logic                         done_q;

  function automatic logic [BANK_W-1:0] bank_of(logic [31:0] a);
    return a[OFF_W +: BANK_W];
  endfunction
  function automatic logic [IDX_W-1:0] idx_of(logic [31:0] a);
    return a[OFF_W + BANK_W +: IDX_W];
  endfunction
  function automatic logic [TAGB_W-1:0] tag_of(logic [31:0] a);
    return a[31 -: TAGB_W];
  endfunction

  // per-lane lookup and per-bank selection
  logic [NUM_THREADS-1:0] cand, lane_hit, lane_way, serve, need_mem;
  logic                   any_mem;
  logic [LANE_W-1:0]      mem_lane;

  always_comb begin
    for (int t = 0; t < NUM_THREADS; t++) begin
      lane_hit[t] = 1'b0;
      lane_way[t] = 1'b0;
      for (int w = 0; w < WAYS; w++)
        if (valid_q[bank_of(addr_q[t])][idx_of(addr_q[t])][w] &&
            tag_q[bank_of(addr_q[t])][idx_of(addr_q[t])][w] == tag_of(addr_q[t])) begin
          lane_hit[t] = 1'b1;
          lane_way[t] = 1'(w);
        end
    end
    cand = '0;
    for (int t = 0; t < NUM_THREADS; t++) begin
      cand[t] = pend_q[t];
      for (int u = 0; u < t; u++)
        if (pend_q[u] && bank_of(addr_q[u]) == bank_of(addr_q[t])) cand[t] = 1'b0;
    end
    serve    = (state_q == S_BUSY) ? (cand & lane_hit & {NUM_THREADS{!rw_q}}) : '0;
    need_mem = (state_q == S_BUSY) ? (cand & ~serve) : '0;
    any_mem  = (need_mem != '0);
    mem_lane = '0;
    for (int t = NUM_THREADS - 1; t >= 0; t--)
      if (need_mem[t]) mem_lane = LANE_W'(t);
  end

  assign req_ready      = (state_q == S_IDLE);
  assign rsp_valid      = done_q;
  assign rsp_data       = out_q;
  assign conflict_event = (state_q == S_BUSY) && ((pend_q & ~cand) != '0);
  assign miss_event     = (state_q == S_BUSY) && any_mem && !rw_q;

  assign mem_req_valid  = (state_q == S_MREQ);
  assign mem_req_rw     = rw_q;
  assign mem_req_addr   = rw_q ? {addr_q[mlane_q][31:2], 2'b00}
                               : {addr_q[mlane_q][31:OFF_W], {OFF_W{1'b0}}};
  assign mem_req_wdata  = wdata_q[mlane_q];
  assign mem_req_byteen = be_q[mlane_q];

  logic [31:0]       ma;
  logic [BANK_W-1:0] mb;
  logic [IDX_W-1:0]  mi;
  assign ma = addr_q[mlane_q];
  assign mb = bank_of(ma);
  assign mi = idx_of(ma);

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q <= S_IDLE;
      done_q  <= 1'b0;
      pend_q  <= '0;
      mlane_q <= '0;
      for (int b = 0; b < BANKS; b++)
        for (int s = 0; s < SETS; s++) begin
          lru_q[b][s] <= 1'b0;
          for (int w = 0; w < WAYS; w++) valid_q[b][s][w] <= 1'b0;
        end
    end else begin
      done_q <= 1'b0;
      unique case (state_q)
        S_IDLE: if (req_valid) begin
          rw_q    <= req_rw;
          pend_q  <= req_mask;
          addr_q  <= req_addr;
          wdata_q <= req_wdata;
          be_q    <= req_byteen;
          out_q   <= '0;
          state_q <= S_BUSY;
        end
        S_BUSY: begin
          for (int t = 0; t < NUM_THREADS; t++)
            if (serve[t]) begin
              out_q[t] <= data_q[bank_of(addr_q[t])][idx_of(addr_q[t])][lane_way[t]][32 * addr_q[t][OFF_W-1:2] +: 32];
              lru_q[bank_of(addr_q[t])][idx_of(addr_q[t])] <= ~lane_way[t];
            end
          pend_q <= pend_q & ~serve;
          if (any_mem) begin
            mlane_q <= mem_lane;
            state_q <= S_MREQ;
          end else if ((pend_q & ~serve) == '0) begin
            done_q  <= 1'b1;
            state_q <= S_IDLE;
          end
        end
        S_MREQ: if (mem_req_ready) begin
          state_q <= S_MWAIT;
          if (rw_q) begin
            // write-through: update a hit line as the write goes out
            for (int w = 0; w < WAYS; w++)
              if (valid_q[mb][mi][w] && tag_q[mb][mi][w] == tag_of(ma))
                for (int k = 0; k < 4; k++)
                  if (be_q[mlane_q][k])
                    data_q[mb][mi][w][32 * ma[OFF_W-1:2] + 8 * k +: 8] <= wdata_q[mlane_q][8 * k +: 8];
          end
        end
        S_MWAIT: if (mem_rsp_valid) begin
          if (rw_q) begin
            pend_q[mlane_q] <= 1'b0;
          end else begin
            data_q[mb][mi][lru_q[mb][mi]]  <= mem_rsp_data;
            tag_q[mb][mi][lru_q[mb][mi]]   <= tag_of(ma);
            valid_q[mb][mi][lru_q[mb][mi]] <= 1'b1;
            lru_q[mb][mi]                  <= ~lru_q[mb][mi];
          end
          state_q <= S_BUSY;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_rsp_expected: assert property (@(posedge clk) disable iff (rst)
    mem_rsp_valid |-> state_q == S_MWAIT);

endmodule
