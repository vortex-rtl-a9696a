// vortex: one Vortex SIMT core (8 warps x 4 threads by default) with its
// instruction cache, data cache, shared memory and one external memory port.
//
// Pipeline (stage boundaries follow the paper's microarchitecture figure):
//   F  warp scheduler picks a warp and sends its PC to the I-cache; the
//      instruction returns one cycle later and is decoded as it arrives. A
//      state-changing instruction (SIMT instruction, branch or jump) stalls its
//      warp at that point; anything fetched for the warp behind it carries an
//      old fetch epoch and is dropped.
//   D  decoded instruction; the scoreboard holds it while a register it uses is
//      still to be written by an older instruction of the same warp.
//   R  register read from the warp's GPR table.
//   E  execute: ALU lanes and branch resolution, CSRs, the GPU execute unit
//      (tmc, wspawn, split, join, bar with the IPDOM stacks and barrier table),
//      or the LSU, which holds the stage until all lanes of a load or store
//      are done. A state-changing instruction resolves its warp here (new PC,
//      maybe a new thread mask) and unstalls it.
//   W  write-back to the active lanes of rd, scoreboard release.
// Stages hand over with valid/ready; a stage takes a new instruction when it is
// empty or its own instruction leaves.
//
// External memory port: one request at a time (mem_req_valid/ready), reads
// return a 16-byte line (mem_rsp_data, word 0 in bits 31:0), writes are single
// words with byte enables and are acknowledged with mem_rsp_valid.
// Global barrier: a bar whose id has its MSB set is meant for the table shared
// by all cores. It is sent out on gbar_req_* (id bits 30:0, the requested
// count, the warp) in the cycle it executes, and the warp waits in the barrier
// mask until gbar_release_valid arrives with its bit set in gbar_release_mask.
// After reset warp 0 runs alone from START_PC with thread 0; `busy` falls when
// no warp is active and the pipeline has drained. `events` carries one strobe
// per pipeline mechanism for performance counting.
// The scheduler masks, warp table, IPDOM stack, barrier table, the five SIMT
// instructions and the memory sizes follow the paper; the handshakes, the
// epoch scheme, stalling on branches, the blocking LSU and the memory port are
// this design's choices.
module vortex
  import vx_pkg::*;
#(
  parameter int          NUM_WARPS    = vx_pkg::NUM_WARPS,
  parameter int          NUM_THREADS  = vx_pkg::NUM_THREADS,
  parameter int          NUM_BARRIERS = vx_pkg::NUM_BARRIERS,
  parameter logic [31:0] START_PC     = vx_pkg::START_PC,
  parameter logic [31:0] SMEM_BASE    = vx_pkg::SMEM_BASE,
  parameter int          ICACHE_BYTES = 1024,
  parameter int          DCACHE_BYTES = 4096,
  parameter int          DCACHE_BANKS = 4,
  parameter int          SMEM_BYTES   = 8192,
  parameter int          SMEM_BANKS   = 4,
  localparam int         WIDW         = $clog2(NUM_WARPS),
  localparam int         LINE_W       = 128
) (
  input  logic              clk,
  input  logic              rst,
  output logic              busy,

  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_rw,
  output logic [31:0]       mem_req_addr,
  output logic [31:0]       mem_req_wdata,
  output logic [3:0]        mem_req_byteen,
  input  logic              mem_rsp_valid,
  input  logic [LINE_W-1:0] mem_rsp_data,

  // global barrier (table shared by the cores, outside this core)
  output logic              gbar_req_valid,
  output logic [30:0]       gbar_req_id,
  output logic [31:0]       gbar_req_count,
  output logic [WIDW-1:0]   gbar_req_wid,
  input  logic              gbar_release_valid,
  input  logic [NUM_WARPS-1:0] gbar_release_mask,

  output vx_events_t        events,
  output logic [63:0]       cycles,
  output logic [63:0]       instrs
);

  localparam int TAG_W = 2 + WIDW + NUM_THREADS;

  // ---------------------------------------------------------------- fetch
  logic                   sched_valid, sched_ready;
  logic [WIDW-1:0]        sched_wid;
  logic [31:0]            sched_pc;
  logic [NUM_THREADS-1:0] sched_tmask;
  logic [1:0]             sched_epoch;
  logic [1:0]             epoch [NUM_WARPS];
  logic [NUM_WARPS-1:0]   active_mask, stalled_mask, barrier_mask, visible_mask;

  logic                   stall_valid;
  logic [WIDW-1:0]        stall_wid;
  logic                   resolve_valid, resolve_tmask_we;
  logic [WIDW-1:0]        resolve_wid;
  logic [31:0]            resolve_pc;
  logic [NUM_THREADS-1:0] resolve_tmask;
  logic                   spawn_valid;
  logic [WIDW:0]          spawn_num;
  logic [31:0]            spawn_pc;
  logic                   bar_req, bar_stall, bar_global, release_valid, lbar_release_valid;
  logic [NUM_WARPS-1:0]   release_mask, lbar_release_mask;
  logic [31:0]            g_bar_count;

  vx_warp_scheduler #(
    .NUM_WARPS(NUM_WARPS), .NUM_THREADS(NUM_THREADS), .START_PC(START_PC)
  ) u_sched (
    .clk, .rst,
    .sched_valid, .sched_ready, .sched_wid, .sched_pc, .sched_tmask, .sched_epoch,
    .stall_valid, .stall_wid,
    .resolve_valid, .resolve_wid, .resolve_pc, .resolve_tmask_we, .resolve_tmask,
    .spawn_valid, .spawn_num, .spawn_pc,
    .bar_valid(bar_req && (bar_global || bar_stall)), .bar_wid(resolve_wid),
    .release_valid, .release_mask,
    .epoch, .active_mask, .stalled_mask, .barrier_mask, .visible_mask
  );

  logic              ic_rsp_valid, ic_rsp_ready;
  logic [31:0]       ic_rsp_data, ic_rsp_addr;
  logic [TAG_W-1:0]  ic_rsp_tag;
  logic              ic_mem_req_valid, ic_mem_req_ready, ic_mem_rsp_valid;
  logic [31:0]       ic_mem_req_addr;
  logic [LINE_W-1:0] arb_rsp_data;
  logic              ic_miss;

  vx_icache #(.CACHE_BYTES(ICACHE_BYTES), .WAYS(2), .LINE_BYTES(16), .TAG_W(TAG_W)) u_icache (
    .clk, .rst,
    .req_valid(sched_valid), .req_ready(sched_ready), .req_addr(sched_pc),
    .req_tag({sched_epoch, sched_wid, sched_tmask}),
    .rsp_valid(ic_rsp_valid), .rsp_ready(ic_rsp_ready), .rsp_data(ic_rsp_data),
    .rsp_addr(ic_rsp_addr), .rsp_tag(ic_rsp_tag),
    .mem_req_valid(ic_mem_req_valid), .mem_req_ready(ic_mem_req_ready),
    .mem_req_addr(ic_mem_req_addr), .mem_rsp_valid(ic_mem_rsp_valid),
    .mem_rsp_data(arb_rsp_data), .miss_event(ic_miss)
  );

  // ---------------------------------------------------------------- decode
  logic [1:0]             f_epoch;
  logic [WIDW-1:0]        f_wid;
  logic [NUM_THREADS-1:0] f_tmask;
  decoded_t               f_dec;
  logic                   f_stale, f_take;

  assign {f_epoch, f_wid, f_tmask} = ic_rsp_tag;
  vx_decoder u_decoder (.instr(ic_rsp_data), .dec(f_dec));

  logic                   d_valid, d_ready, d_fire;
  decoded_t               d_dec;
  logic [WIDW-1:0]        d_wid;
  logic [31:0]            d_pc;
  logic [NUM_THREADS-1:0] d_tmask;

  assign ic_rsp_ready = d_ready;
  assign f_stale      = (f_epoch != epoch[f_wid]);
  assign f_take       = ic_rsp_valid && d_ready && !f_stale;
  assign stall_valid  = f_take && f_dec.is_ctl;
  assign stall_wid    = f_wid;

  // ---------------------------------------------------------------- issue
  logic hazard, r_valid, r_ready, r_fire;
  decoded_t               r_dec;
  logic [WIDW-1:0]        r_wid;
  logic [31:0]            r_pc;
  logic [NUM_THREADS-1:0] r_tmask;

  logic                   wb_gpr_we, wb_sb_clr, wb_retired;
  logic [WIDW-1:0]        wb_wid;
  logic [4:0]             wb_rd;
  logic [NUM_THREADS-1:0] wb_wmask;
  logic [NUM_THREADS-1:0][31:0] wb_wdata;

  vx_scoreboard #(.NUM_WARPS(NUM_WARPS)) u_scoreboard (
    .clk, .rst,
    .chk_wid(d_wid), .chk_rs1(d_dec.rs1), .chk_use_rs1(d_dec.use_rs1),
    .chk_rs2(d_dec.rs2), .chk_use_rs2(d_dec.use_rs2), .chk_rd(d_dec.rd), .chk_wb(d_dec.wb),
    .hazard,
    .set_valid(d_fire && d_dec.wb), .set_wid(d_wid), .set_rd(d_dec.rd),
    .clr_valid(wb_sb_clr), .clr_wid(wb_wid), .clr_rd(wb_rd)
  );

  assign d_fire  = d_valid && !hazard && r_ready;
  assign d_ready = !d_valid || d_fire;

  always_ff @(posedge clk) begin
    if (rst) d_valid <= 1'b0;
    else if (d_ready) begin
      d_valid <= f_take;
      if (f_take) begin
        d_dec   <= f_dec;
        d_wid   <= f_wid;
        d_pc    <= ic_rsp_addr;
        d_tmask <= f_tmask;
      end
    end
  end

  // ---------------------------------------------------------------- register read
  logic [NUM_THREADS-1:0][31:0] r_rs1, r_rs2;

  vx_gpr #(.NUM_WARPS(NUM_WARPS), .NUM_THREADS(NUM_THREADS)) u_gpr (
    .clk,
    .rd_wid(r_wid), .rs1(r_dec.rs1), .rs2(r_dec.rs2), .rs1_data(r_rs1), .rs2_data(r_rs2),
    .we(wb_gpr_we), .wr_wid(wb_wid), .wr_rd(wb_rd), .wmask(wb_wmask), .wdata(wb_wdata)
  );

  logic e_valid, e_ready, e_fire;
  decoded_t               e_dec;
  logic [WIDW-1:0]        e_wid;
  logic [31:0]            e_pc;
  logic [NUM_THREADS-1:0] e_tmask;
  logic [NUM_THREADS-1:0][31:0] e_rs1, e_rs2;

  assign r_fire  = r_valid && e_ready;
  assign r_ready = !r_valid || r_fire;

  always_ff @(posedge clk) begin
    if (rst) r_valid <= 1'b0;
    else if (r_ready) begin
      r_valid <= d_fire;
      if (d_fire) begin
        r_dec   <= d_dec;
        r_wid   <= d_wid;
        r_pc    <= d_pc;
        r_tmask <= d_tmask;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) e_valid <= 1'b0;
    else if (e_ready) begin
      e_valid <= r_fire;
      if (r_fire) begin
        e_dec   <= r_dec;
        e_wid   <= r_wid;
        e_pc    <= r_pc;
        e_tmask <= r_tmask;
        e_rs1   <= r_rs1;
        e_rs2   <= r_rs2;
      end
    end
  end

  // ---------------------------------------------------------------- execute
  logic [NUM_THREADS-1:0][31:0] alu_result, csr_result, lsu_result;
  logic                         br_taken;
  logic [31:0]                  br_next_pc;

  vx_execute_unit #(.NUM_THREADS(NUM_THREADS)) u_alu (
    .dec(e_dec), .pc(e_pc), .tmask(e_tmask), .rs1_data(e_rs1), .rs2_data(e_rs2),
    .result(alu_result), .br_taken, .next_pc(br_next_pc)
  );

  vx_csr_unit #(.NUM_WARPS(NUM_WARPS), .NUM_THREADS(NUM_THREADS)) u_csr (
    .clk, .rst, .instr_retired(wb_retired), .csr(e_dec.csr), .wid(e_wid),
    .rdata(csr_result), .cycles, .instrs
  );

  // IPDOM stack of every warp
  logic [NUM_WARPS-1:0]   ip_empty, ip_top_ft, ip_full;
  logic [31:0]            ip_top_pc   [NUM_WARPS];
  logic [NUM_THREADS-1:0] ip_top_mask [NUM_WARPS];
  logic                   g_push, g_push_ft, g_pop, g_tmask_we, g_diverged;
  logic [NUM_THREADS-1:0] g_push_ft_mask, g_push_mask, g_tmask;
  logic [31:0]            g_push_pc, g_next_pc;
  logic [$clog2(NUM_BARRIERS)-1:0] g_bar_id;
  logic [WIDW:0]          g_bar_num;

  for (genvar w = 0; w < NUM_WARPS; w++) begin : g_ipdom
    vx_ipdom_stack #(.NUM_THREADS(NUM_THREADS)) u_ipdom (
      .clk, .rst,
      .push(e_fire && g_push && e_wid == WIDW'(w)),
      .push_ft(e_fire && g_push_ft && e_wid == WIDW'(w)),
      .push_ft_mask(g_push_ft_mask), .push_pc(g_push_pc), .push_mask(g_push_mask),
      .pop(e_fire && g_pop && e_wid == WIDW'(w)),
      .top_fall_through(ip_top_ft[w]), .top_pc(ip_top_pc[w]), .top_mask(ip_top_mask[w]),
      .empty(ip_empty[w]), .full(ip_full[w])
    );
  end

  vx_gpu_execute #(
    .NUM_WARPS(NUM_WARPS), .NUM_THREADS(NUM_THREADS), .NUM_BARRIERS(NUM_BARRIERS)
  ) u_gpu (
    .dec(e_dec), .valid(e_valid), .pc(e_pc), .tmask(e_tmask), .rs1_data(e_rs1), .rs2_data(e_rs2),
    .ipdom_empty(ip_empty[e_wid]), .ipdom_top_ft(ip_top_ft[e_wid]),
    .ipdom_top_pc(ip_top_pc[e_wid]), .ipdom_top_mask(ip_top_mask[e_wid]),
    .next_pc(g_next_pc), .tmask_we(g_tmask_we), .new_tmask(g_tmask),
    .ipdom_push(g_push), .ipdom_push_ft(g_push_ft), .ipdom_push_ft_mask(g_push_ft_mask), .ipdom_push_pc(g_push_pc),
    .ipdom_push_mask(g_push_mask), .ipdom_pop(g_pop),
    .spawn_valid(spawn_valid), .spawn_num, .spawn_pc,
    .bar_valid(bar_req), .bar_id(g_bar_id), .bar_num(g_bar_num),
    .bar_global, .bar_count(g_bar_count), .bar_global_id(gbar_req_id), .diverged(g_diverged)
  );

  vx_barrier_table #(.NUM_WARPS(NUM_WARPS), .NUM_BARRIERS(NUM_BARRIERS)) u_barrier (
    .clk, .rst,
    .bar_valid(e_fire && bar_req && !bar_global), .bar_id(g_bar_id), .bar_num(g_bar_num), .bar_wid(e_wid),
    .stall(bar_stall), .release_valid(lbar_release_valid), .release_mask(lbar_release_mask)
  );

  // A global bar leaves the core and always stalls the warp; the release comes
  // back from the global table and is merged with the local one.
  assign gbar_req_valid = e_fire && bar_req && bar_global;
  assign gbar_req_count = g_bar_count;
  assign gbar_req_wid   = e_wid;
  assign release_valid  = lbar_release_valid || gbar_release_valid;
  assign release_mask   = (lbar_release_valid ? lbar_release_mask : '0)
                        | (gbar_release_valid ? gbar_release_mask : '0);

  // LSU with the data cache and the shared memory
  logic lsu_busy, lsu_done;
  logic                         dc_req_valid, dc_req_ready, dc_req_rw, dc_rsp_valid;
  logic [NUM_THREADS-1:0]       dc_req_mask;
  logic [NUM_THREADS-1:0][31:0] dc_req_addr, dc_req_wdata, dc_rsp_data;
  logic [NUM_THREADS-1:0][3:0]  dc_req_byteen;
  logic                         sm_req_valid, sm_req_ready, sm_req_rw, sm_rsp_valid;
  logic [NUM_THREADS-1:0]       sm_req_mask;
  logic [NUM_THREADS-1:0][31:0] sm_req_addr, sm_req_wdata, sm_rsp_data;
  logic [NUM_THREADS-1:0][3:0]  sm_req_byteen;
  logic                         is_mem;

  assign is_mem = e_valid && e_dec.unit == EX_LSU;

  vx_lsu #(.NUM_THREADS(NUM_THREADS), .SMEM_BASE(SMEM_BASE), .SMEM_BYTES(SMEM_BYTES)) u_lsu (
    .clk, .rst,
    .start(is_mem && !lsu_busy), .is_store(e_dec.is_store), .mem_f3(e_dec.mem_f3), .imm(e_dec.imm),
    .tmask(e_tmask), .rs1_data(e_rs1), .rs2_data(e_rs2),
    .busy(lsu_busy), .done(lsu_done), .ldata(lsu_result),
    .dc_req_valid, .dc_req_ready, .dc_req_rw, .dc_req_mask, .dc_req_addr, .dc_req_wdata,
    .dc_req_byteen, .dc_rsp_valid, .dc_rsp_data,
    .sm_req_valid, .sm_req_ready, .sm_req_rw, .sm_req_mask, .sm_req_addr, .sm_req_wdata,
    .sm_req_byteen, .sm_rsp_valid, .sm_rsp_data
  );

  logic              dc_mem_req_valid, dc_mem_req_ready, dc_mem_req_rw, dc_mem_rsp_valid;
  logic [31:0]       dc_mem_req_addr, dc_mem_req_wdata;
  logic [3:0]        dc_mem_req_byteen;
  logic              dc_miss, dc_conflict, sm_conflict;

  vx_dcache #(
    .NUM_THREADS(NUM_THREADS), .CACHE_BYTES(DCACHE_BYTES), .WAYS(2), .BANKS(DCACHE_BANKS), .LINE_BYTES(16)
  ) u_dcache (
    .clk, .rst,
    .req_valid(dc_req_valid), .req_ready(dc_req_ready), .req_rw(dc_req_rw), .req_mask(dc_req_mask),
    .req_addr(dc_req_addr), .req_wdata(dc_req_wdata), .req_byteen(dc_req_byteen),
    .rsp_valid(dc_rsp_valid), .rsp_data(dc_rsp_data),
    .mem_req_valid(dc_mem_req_valid), .mem_req_ready(dc_mem_req_ready), .mem_req_rw(dc_mem_req_rw),
    .mem_req_addr(dc_mem_req_addr), .mem_req_wdata(dc_mem_req_wdata), .mem_req_byteen(dc_mem_req_byteen),
    .mem_rsp_valid(dc_mem_rsp_valid), .mem_rsp_data(arb_rsp_data),
    .miss_event(dc_miss), .conflict_event(dc_conflict)
  );

  vx_shared_memory #(.NUM_THREADS(NUM_THREADS), .SMEM_BYTES(SMEM_BYTES), .BANKS(SMEM_BANKS)) u_smem (
    .clk, .rst,
    .req_valid(sm_req_valid), .req_ready(sm_req_ready), .req_rw(sm_req_rw), .req_mask(sm_req_mask),
    .req_addr(sm_req_addr), .req_wdata(sm_req_wdata), .req_byteen(sm_req_byteen),
    .rsp_valid(sm_rsp_valid), .rsp_data(sm_rsp_data), .conflict_event(sm_conflict)
  );

  vx_mem_arbiter #(.LINE_W(LINE_W)) u_arb (
    .clk, .rst,
    .c0_req_valid(dc_mem_req_valid), .c0_req_ready(dc_mem_req_ready), .c0_req_rw(dc_mem_req_rw),
    .c0_req_addr(dc_mem_req_addr), .c0_req_wdata(dc_mem_req_wdata), .c0_req_byteen(dc_mem_req_byteen),
    .c0_rsp_valid(dc_mem_rsp_valid),
    .c1_req_valid(ic_mem_req_valid), .c1_req_ready(ic_mem_req_ready), .c1_req_addr(ic_mem_req_addr),
    .c1_rsp_valid(ic_mem_rsp_valid),
    .rsp_data(arb_rsp_data),
    .mem_req_valid, .mem_req_ready, .mem_req_rw, .mem_req_addr, .mem_req_wdata, .mem_req_byteen,
    .mem_rsp_valid, .mem_rsp_data
  );

  assign e_fire  = e_valid && (!is_mem || lsu_done);
  assign e_ready = !e_valid || e_fire;

  // warp state update for state-changing instructions
  assign resolve_valid    = e_fire && e_dec.is_ctl;
  assign resolve_wid      = e_wid;
  assign resolve_pc       = (e_dec.unit == EX_BR) ? br_next_pc : g_next_pc;
  assign resolve_tmask_we = g_tmask_we;
  assign resolve_tmask    = g_tmask;

  // ---------------------------------------------------------------- write-back
  vx_writeback #(.NUM_WARPS(NUM_WARPS), .NUM_THREADS(NUM_THREADS)) u_wb (
    .clk, .rst,
    .in_valid(e_fire), .in_unit(e_dec.unit), .in_wb(e_dec.wb), .in_wid(e_wid), .in_rd(e_dec.rd),
    .in_tmask(e_tmask), .alu_result, .csr_result, .lsu_result,
    .gpr_we(wb_gpr_we), .gpr_wid(wb_wid), .gpr_rd(wb_rd), .gpr_wmask(wb_wmask), .gpr_wdata(wb_wdata),
    .sb_clr(wb_sb_clr), .retired(wb_retired)
  );

  assign busy = (active_mask != '0) || d_valid || r_valid || e_valid || ic_rsp_valid || wb_retired;

  always_comb begin
    events                 = '0;
    events.warp_stall      = stall_valid;
    events.fetch_drop      = ic_rsp_valid && d_ready && f_stale;
    events.sb_hazard       = d_valid && hazard;
    events.split_diverge   = e_fire && g_push;
    events.split_uniform   = e_fire && e_dec.unit == EX_GPU && e_dec.gpu_op == GPU_SPLIT && !g_diverged;
    events.join_pop        = e_fire && g_pop;
    events.wspawn          = e_fire && spawn_valid;
    events.tmc             = e_fire && e_dec.unit == EX_GPU && e_dec.gpu_op == GPU_TMC;
    events.bar_stall       = e_fire && bar_req && (bar_global || bar_stall);
    events.bar_release     = release_valid;
    events.branch_taken    = e_fire && br_taken;
    events.icache_miss     = ic_miss;
    events.dcache_miss     = dc_miss;
    events.dcache_conflict = dc_conflict;
    events.smem_conflict   = sm_conflict;
    events.lsu_wait        = is_mem && !lsu_done;
  end

endmodule
