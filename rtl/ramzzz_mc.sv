// ramzzz_mc: the rank-aware power-management extension of a DRAM memory controller.
// It keeps hot pages together in a few busy ranks so the other ranks see long idle
// periods, and demotes each idle rank through the chain of DRAM low-power states
// with per-rank, per-slot timeouts.
//
// Data path (one request at a time, first come first served):
//   req_* -> cmd_fifo -> hold stage -> iss_* (to the base controller)
// In the hold stage the page number is translated by the Remapping Table (1 cycle),
// the request waits while its page is being migrated, and, if its rank is in a
// low-power state, it wakes the rank and waits for the resynchronisation. A request
// leaves through iss_* with the DRAM frame in place of the page number, and iss_rank.
//
// Side paths:
//  * MQ: every application request entering the FIFO creates an update in
//    mq_update_queue; mq_table applies them off the critical path and fetches or
//    writes back descriptors through mq_mem_*.
//  * Migration: the OS loads the epoch's migrations (os_mig_*), migration_engine
//    runs them in idle periods through mig_cmd_* and feeds the Remapping Table.
//  * Demotion: one demotion_ctrl per rank sees the rank's activity (requests issued
//    to it, rank_busy_i from the base controller, migration traffic) and wakes it
//    for waiting requests or migrations; rank_state tells the base controller which
//    power state to put the rank in.
//  * Idle histograms: one idle_histogram per rank records the idle periods that
//    demotion_ctrl reports; the OS reads the finished slot's histogram after
//    irq_slot to predict the next slot and writes the new timeouts (os_dem_cfg_*).
//  * slot_epoch_timer raises irq_slot / irq_epoch.
//  * Statistics: the counters of all blocks (MQ hits and misses, promotions,
//    demotions, precluded and dropped updates, segments, remapped requests, and per
//    rank the wake-ups and the cycles spent in each power state) are read by the OS
//    through os_stat_sel / os_stat_rank -> os_stat_data, one cycle later.
//
// The Remapping Table's lk_frame output is not used here: lk_out_page already
// carries the frame on a hit and the page number on a miss.
//
// The OS-side parts of the scheme (page grouping, group-to-rank matching, Eulerian
// cycle scheduling, idle-period prediction and the greedy choice of timeouts) are
// software and are reached through the os_* ports. The base controller (arbiter,
// command sequencing, datapath, PHY) and the DRAM ranks are outside this module.
//
// From the paper: the four new controller modules and their roles, the FIFO and
// FCFS service, the slot/epoch structure, remapping on entry, blocking only the
// pages being migrated, migrations in idle periods. This design's choices: the
// single hold stage, the port list, the rank of a frame (frame / RANK_PAGES,
// contiguous ranks of equal size).
module ramzzz_mc
  import ramzzz_pkg::*;
#(
  parameter int unsigned NUM_RANKS       = 8,
  parameter int unsigned RANK_LSB        = 16,          // 2 GB / 8 ranks / 4 KB
  parameter int unsigned FIFO_DEPTH      = 32,
  parameter int unsigned MQ_ENTRIES      = 4096,
  parameter int unsigned MQ_UPD_DEPTH    = 2560,
  parameter int unsigned MQ_LIFETIME     = 65536,
  parameter int unsigned REMAP_ENTRIES   = 4096,
  parameter int unsigned MIG_QDEPTH      = 1024,
  parameter int unsigned MIG_MAX_SEGS    = 256,
  parameter int unsigned SLOT_CYCLES     = 100_000_000,
  parameter int unsigned SLOTS_PER_EPOCH = 10,
  parameter int unsigned SQRT_T          = 10000
) (
  input  logic       clk,
  input  logic       rst_n,
  // requests from the cache controller (LLC misses and write-backs)
  input  logic       req_valid,
  output logic       req_ready,
  input  mem_req_t   req,
  // requests to the base controller, page replaced by the DRAM frame
  output logic       iss_valid,
  input  logic       iss_ready,
  output mem_req_t   iss_req,
  output logic [$clog2(NUM_RANKS)-1:0] iss_rank,
  input  logic [NUM_RANKS-1:0] rank_busy_i,
  output pstate_t    rank_state [NUM_RANKS],
  output logic [NUM_RANKS-1:0] rank_ready,
  // migration commands to the ranks (extra row buffer per rank)
  output logic       mig_cmd_valid,
  input  logic       mig_cmd_ready,
  output mig_cmd_t   mig_cmd,
  input  logic       mig_cmd_done,
  // MQ descriptor traffic to DRAM
  output logic       mq_mem_req_valid,
  input  logic       mq_mem_req_ready,
  output logic       mq_mem_req_write,
  output page_t      mq_mem_req_page,
  output mq_desc_t   mq_mem_req_desc,
  input  logic       mq_mem_rsp_valid,
  input  mq_desc_t   mq_mem_rsp_desc,
  // OS: MQ structure
  input  logic       os_mq_freeze,
  input  logic [$clog2(MQ_ENTRIES)-1:0] os_mq_rd_idx,
  output mq_desc_t   os_mq_rd_desc,
  output logic [PTR_W-1:0] os_mq_head [MQ_QUEUES],
  output logic [PTR_W-1:0] os_mq_tail [MQ_QUEUES],
  // OS: migration queue
  input  logic       os_mig_wr_valid,
  input  mig_entry_t os_mig_wr_entry,
  output logic       os_mig_wr_ready,
  input  logic       os_mig_go,
  output logic       mig_busy,
  // OS: Remapping Table commit
  input  logic       os_commit,
  input  logic       os_remap_clear,
  input  logic [$clog2(REMAP_ENTRIES)-1:0] os_remap_rd_idx,
  output logic       os_remap_rd_valid,
  output page_t      os_remap_rd_page,
  output page_t      os_remap_rd_frame,
  output logic       irq_remap_full,
  // OS: demotion configuration
  input  logic       os_dem_cfg_we,
  input  logic [$clog2(NUM_RANKS)-1:0] os_dem_cfg_rank,
  input  logic [PSTATE_W-1:0] os_dem_cfg_idx,
  input  time_t      os_dem_cfg_val,
  // OS: idle histograms
  input  logic       os_hist_rd_en,
  input  logic [$clog2(NUM_RANKS)-1:0] os_hist_rank,
  input  logic       os_hist_sel,
  input  logic [$clog2(SQRT_T+1)-1:0] os_hist_idx,
  output logic [31:0] os_hist_data,
  output logic [$clog2(SQRT_T+1)-1:0] os_hist_long_cnt [NUM_RANKS],
  // OS: statistics (registered read, see the table below)
  input  logic [4:0] os_stat_sel,
  input  logic [$clog2(NUM_RANKS)-1:0] os_stat_rank,
  output logic [31:0] os_stat_data,
  // slot / epoch interrupts
  output logic       irq_slot,
  output logic       irq_epoch
);
  localparam int unsigned RW = $clog2(NUM_RANKS);

  // ---------------- request FIFO and MQ snooping -----------------------------------
  logic      fifo_out_valid, fifo_pop;
  mem_req_t  fifo_out;
  logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_count;

  cmd_fifo #(.T(mem_req_t), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid(req_valid), .in_ready(req_ready), .in_data(req),
    .out_valid(fifo_out_valid), .out_ready(fifo_pop), .out_data(fifo_out),
    .count(fifo_count)
  );

  logic  upd_valid, upd_ready;
  page_t upd_page;
  logic [31:0] upd_dropped, upd_precluded;
  logic [$clog2(MQ_UPD_DEPTH+1)-1:0] upd_count;

  mq_update_queue #(.DEPTH(MQ_UPD_DEPTH), .HASH_ENTRIES(MQ_ENTRIES)) u_mq_upd (
    .clk, .rst_n,
    .push_valid(req_valid && req_ready && req.app), .push_page(req.page),
    .pop_valid(upd_valid), .pop_ready(upd_ready), .pop_page(upd_page),
    .dropped(upd_dropped), .precluded(upd_precluded), .count(upd_count)
  );

  logic        mq_busy;
  logic [31:0] mq_hits, mq_misses, mq_promotions, mq_demotions;

  mq_table #(.ENTRIES(MQ_ENTRIES), .QUEUES(MQ_QUEUES), .LIFETIME(MQ_LIFETIME)) u_mq (
    .clk, .rst_n,
    .upd_valid, .upd_ready, .upd_page, .os_freeze(os_mq_freeze),
    .mem_req_valid(mq_mem_req_valid), .mem_req_ready(mq_mem_req_ready),
    .mem_req_write(mq_mem_req_write), .mem_req_page(mq_mem_req_page),
    .mem_req_desc(mq_mem_req_desc),
    .mem_rsp_valid(mq_mem_rsp_valid), .mem_rsp_desc(mq_mem_rsp_desc),
    .os_rd_idx(os_mq_rd_idx), .os_rd_desc(os_mq_rd_desc),
    .os_head(os_mq_head), .os_tail(os_mq_tail), .busy(mq_busy),
    .n_hits(mq_hits), .n_misses(mq_misses),
    .n_promotions(mq_promotions), .n_demotions(mq_demotions)
  );

  // ---------------- hold stage: remap, block, wake, issue --------------------------
  logic      h_valid, h_ok;          // h_ok: last cycle's lookup was for this request, unblocked
  mem_req_t  h_req;
  logic      lk_hit;
  page_t     lk_frame, lk_out_page;
  logic      blk_hit;
  logic [RW-1:0] h_rank;
  logic      issue;

  logic      remap_valid, remap_ready;
  page_t     remap_page, remap_frame;
  logic [$clog2(REMAP_ENTRIES+1)-1:0] remap_occ;

  remap_table #(.ENTRIES(REMAP_ENTRIES)) u_remap (
    .clk, .rst_n,
    .lk_page(h_req.page), .lk_hit, .lk_frame, .lk_out_page,
    .ins_valid(remap_valid), .ins_ready(remap_ready),
    .ins_page(remap_page), .ins_frame(remap_frame),
    .os_clear(os_remap_clear), .os_rd_idx(os_remap_rd_idx),
    .os_rd_valid(os_remap_rd_valid), .os_rd_page(os_remap_rd_page),
    .os_rd_frame(os_remap_rd_frame), .irq_full(irq_remap_full), .occupancy(remap_occ)
  );

  assign h_rank   = RW'(lk_out_page >> RANK_LSB);
  assign issue    = h_valid && h_ok && !blk_hit && rank_ready[h_rank] && iss_ready;
  assign fifo_pop = fifo_out_valid && (!h_valid || issue);

  assign iss_valid     = h_valid && h_ok && !blk_hit && rank_ready[h_rank];
  assign iss_req       = '{write: h_req.write, app: h_req.app, page: lk_out_page, line: h_req.line};
  assign iss_rank      = h_rank;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_valid <= 1'b0;
      h_ok    <= 1'b0;
      h_req   <= '0;
    end else begin
      if (fifo_pop) begin
        h_valid <= 1'b1;
        h_req   <= fifo_out;
        h_ok    <= 1'b0;
      end else begin
        if (issue) h_valid <= 1'b0;
        h_ok <= h_valid && !blk_hit;
      end
    end
  end

  // ---------------- migration -------------------------------------------------------
  logic [NUM_RANKS-1:0] mig_wake, mig_active;
  logic [31:0] mig_segments, mig_moves;
  logic        sched_ok;

  // the memory system is idle for migrations when no request could be issued
  assign sched_ok = (!fifo_out_valid && !h_valid) || (h_valid && blk_hit);

  migration_engine #(.QDEPTH(MIG_QDEPTH), .MAX_SEGS(MIG_MAX_SEGS),
                     .NUM_RANKS(NUM_RANKS), .RANK_LSB(RANK_LSB)) u_mig (
    .clk, .rst_n,
    .os_wr_valid(os_mig_wr_valid), .os_wr_entry(os_mig_wr_entry),
    .os_wr_ready(os_mig_wr_ready), .os_go(os_mig_go), .hold(os_commit),
    .sched_ok, .rank_wake(mig_wake), .rank_active(mig_active), .rank_ready(rank_ready),
    .cmd_valid(mig_cmd_valid), .cmd_ready(mig_cmd_ready), .cmd(mig_cmd),
    .cmd_done(mig_cmd_done),
    .remap_valid, .remap_ready, .remap_page, .remap_frame,
    .blk_page(h_req.page), .blk_hit, .busy(mig_busy),
    .n_segments(mig_segments), .n_migrations(mig_moves)
  );

  // ---------------- slot / epoch ----------------------------------------------------
  logic [$clog2(SLOTS_PER_EPOCH+1)-1:0] slot_idx;
  logic [31:0] n_slots, n_epochs;

  slot_epoch_timer #(.SLOT_CYCLES(SLOT_CYCLES), .SLOTS_PER_EPOCH(SLOTS_PER_EPOCH)) u_timer (
    .clk, .rst_n, .slot_start(irq_slot), .epoch_start(irq_epoch),
    .slot_idx, .n_slots, .n_epochs
  );

  // ---------------- per-rank demotion and idle histogram ----------------------------
  logic [31:0] hist_data [NUM_RANKS];
  logic [RW-1:0] hist_rank_q;

  // per-rank statistics, read through os_stat_*
  logic [31:0] rk_resyncs [NUM_RANKS];
  logic [31:0] rk_overflow [NUM_RANKS];
  logic [1:0]  rk_flags [NUM_RANKS];
  logic [31:0] rk_cycles [NUM_RANKS][NUM_LP+1];

  for (genvar r = 0; r < int'(NUM_RANKS); r++) begin : g_rank
    logic  access_req, busy, idle_end, resyncing, init_done;
    time_t idle_len;
    logic [31:0] n_resyncs, overflow;
    logic [31:0] state_cycles [NUM_LP+1];

    assign access_req = (h_valid && h_ok && !blk_hit && h_rank == RW'(r)) || mig_wake[r];
    assign busy       = rank_busy_i[r] || mig_active[r] || (issue && h_rank == RW'(r));

    demotion_ctrl #(.NLP(NUM_LP)) u_dem (
      .clk, .rst_n,
      .cfg_we(os_dem_cfg_we && os_dem_cfg_rank == RW'(r)),
      .cfg_idx(os_dem_cfg_idx), .cfg_val(os_dem_cfg_val),
      .access_req, .busy,
      .state(rank_state[r]), .ready(rank_ready[r]), .resyncing,
      .idle_end, .idle_len, .n_resyncs, .state_cycles
    );

    idle_histogram #(.SQRT_T(SQRT_T)) u_hist (
      .clk, .rst_n, .slot_start(irq_slot),
      .idle_end, .idle_len,
      .os_rd_en(os_hist_rd_en && os_hist_rank == RW'(r)),
      .os_rd_sel(os_hist_sel), .os_rd_idx(os_hist_idx),
      .os_rd_data(hist_data[r]), .os_long_cnt(os_hist_long_cnt[r]),
      .init_done, .overflow
    );

    assign rk_resyncs[r]  = n_resyncs;
    assign rk_overflow[r] = overflow;
    assign rk_flags[r]    = {init_done, resyncing};
    assign rk_cycles[r]   = state_cycles;
  end

  // ---------------- statistics ------------------------------------------------------
  // os_stat_sel: 0 FIFO occupancy, 1 updates dropped, 2 updates precluded, 3 update
  // queue occupancy, 4 MQ hits, 5 MQ misses, 6 promotions, 7 demotions, 8 MQ busy,
  // 9 Remapping Table occupancy, 10 remapped requests issued, 11 segments, 12 pages
  // migrated, 13 slots, 14 epochs, 15 slot in epoch; per rank (os_stat_rank):
  // 16 wake-ups, 17 histogram overflows, 18 {histogram ready, resyncing},
  // 19..24 cycles in ACT, S1..S5.
  logic [31:0] n_remap_hits;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_remap_hits <= '0;
      os_stat_data <= '0;
    end else begin
      if (issue && lk_hit) n_remap_hits <= n_remap_hits + 1;
      unique case (os_stat_sel)
        5'd0:  os_stat_data <= 32'(fifo_count);
        5'd1:  os_stat_data <= upd_dropped;
        5'd2:  os_stat_data <= upd_precluded;
        5'd3:  os_stat_data <= 32'(upd_count);
        5'd4:  os_stat_data <= mq_hits;
        5'd5:  os_stat_data <= mq_misses;
        5'd6:  os_stat_data <= mq_promotions;
        5'd7:  os_stat_data <= mq_demotions;
        5'd8:  os_stat_data <= 32'(mq_busy);
        5'd9:  os_stat_data <= 32'(remap_occ);
        5'd10: os_stat_data <= n_remap_hits;
        5'd11: os_stat_data <= mig_segments;
        5'd12: os_stat_data <= mig_moves;
        5'd13: os_stat_data <= n_slots;
        5'd14: os_stat_data <= n_epochs;
        5'd15: os_stat_data <= 32'(slot_idx);
        5'd16: os_stat_data <= rk_resyncs[os_stat_rank];
        5'd17: os_stat_data <= rk_overflow[os_stat_rank];
        5'd18: os_stat_data <= 32'(rk_flags[os_stat_rank]);
        5'd19, 5'd20, 5'd21, 5'd22, 5'd23, 5'd24:
               os_stat_data <= rk_cycles[os_stat_rank][3'(os_stat_sel - 5'd19)];
        default: os_stat_data <= '0;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)             hist_rank_q <= '0;
    else if (os_hist_rd_en) hist_rank_q <= os_hist_rank;
  end
  assign os_hist_data = hist_data[hist_rank_q];

  // a request is never issued while its page is being migrated
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
    end else if (issue) a_no_issue_blocked: assert (!blk_hit);
  end
endmodule
