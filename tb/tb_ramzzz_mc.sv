// tb_ramzzz_mc: end-to-end test of the power-managed memory controller at reduced
// time constants (slots of 3000 cycles, epochs of 3 slots, histograms with
// sqrt(T) = 64) and small migration queue and FIFO; 8 ranks of 1024 frames.
//
// The testbench plays every party around the controller:
//  - the processor: requests to 64 logical pages, mostly to a hot set, with quiet
//    phases in every slot so that idle ranks sink through all low-power states;
//    the address it sends for a page is the OS page-table entry (pt[]);
//  - the base controller and DRAM: the content of every frame is modelled; a
//    request is accepted at random, must carry the frame that holds its page,
//    the rank of that frame, and find the rank active; migration commands move
//    content through one extra row buffer per rank;
//  - the DRAM holding the MQ descriptors;
//  - the OS: demotion timeouts, histogram reads after each slot (checked against
//    the idle periods the demotion controllers reported), and at each epoch a plan
//    of migration segments (cycles over ranks and moves into free frames), and the
//    commit of the Remapping Table into pt[] when the table reports a collision.
// It counts every mechanism and fails if one never happened: remapped requests,
// requests held behind a migration, rank wake-ups and each of the five low-power
// states, migration segments, MQ promotions, demotions, misses and write-backs,
// precluded duplicate updates, short and long idle periods, slot and epoch
// interrupts, the Remapping Table full interrupt, a full request FIFO.
module tb_ramzzz_mc;
  import ramzzz_pkg::*;
  localparam int NR = 8, RL = 10, SLOT = 3000, SPE = 3, SQ = 64, NPAGES = 64;
  localparam int EPOCHS = 8;

  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, iss_valid, iss_ready;
  mem_req_t req, iss_req;
  logic [2:0] iss_rank;
  logic [NR-1:0] rank_busy_i, rank_ready;
  pstate_t rank_state [NR];
  logic mig_cmd_valid, mig_cmd_ready, mig_cmd_done;
  mig_cmd_t mig_cmd;
  logic mq_mem_req_valid, mq_mem_req_ready, mq_mem_req_write, mq_mem_rsp_valid;
  page_t mq_mem_req_page;
  mq_desc_t mq_mem_req_desc, mq_mem_rsp_desc, os_mq_rd_desc;
  logic os_mq_freeze;
  logic [11:0] os_mq_rd_idx;
  logic [PTR_W-1:0] os_mq_head [MQ_QUEUES], os_mq_tail [MQ_QUEUES];
  logic os_mig_wr_valid, os_mig_wr_ready, os_mig_go, mig_busy;
  mig_entry_t os_mig_wr_entry;
  logic os_commit, os_remap_clear, os_remap_rd_valid, irq_remap_full;
  logic [11:0] os_remap_rd_idx;
  page_t os_remap_rd_page, os_remap_rd_frame;
  logic os_dem_cfg_we;
  logic [2:0] os_dem_cfg_rank;
  logic [PSTATE_W-1:0] os_dem_cfg_idx;
  time_t os_dem_cfg_val;
  logic os_hist_rd_en, os_hist_sel;
  logic [2:0] os_hist_rank;
  logic [6:0] os_hist_idx;
  logic [31:0] os_hist_data;
  logic [6:0] os_hist_long_cnt [NR];
  logic irq_slot, irq_epoch;
  logic [4:0] os_stat_sel;
  logic [2:0] os_stat_rank;
  logic [31:0] os_stat_data;

  ramzzz_mc #(.NUM_RANKS(NR), .RANK_LSB(RL), .FIFO_DEPTH(4), .MQ_LIFETIME(300),
              .MIG_QDEPTH(64), .MIG_MAX_SEGS(16), .SLOT_CYCLES(SLOT),
              .SLOTS_PER_EPOCH(SPE), .SQRT_T(SQ)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s @%0t", what, $time); end
  endtask

  // ---- models ----
  int    content [page_t];      // frame -> logical page (-1 free)
  page_t loc [NPAGES];          // logical page -> frame
  page_t pt  [NPAGES];          // logical page -> address the processor sends
  int    addr2l [page_t];
  page_t remap_m [page_t];      // model of the Remapping Table
  int    rbuf [NR];             // extra row buffer per rank
  int    inflight [$];          // logical pages of accepted requests, in order
  bit    gen_stop;
  int    pend_done;

  // mechanism counters
  int c_remapped, c_blocked, c_fifo_full, c_hist_short, c_hist_long, c_remap_full;
  int c_slots, c_epochs, c_issued;
  int c_state [1:NUM_LP];

  function automatic int rank_of(page_t f); return int'(f >> RL); endfunction

  // ---- processor ----
  int  cur_l;
  logic accepted;
  always @(posedge clk) begin
    accepted <= req_valid && req_ready;
    if (req_valid && req_ready) inflight.push_back(cur_l);
  end
  initial begin
    req_valid = 0; req = '0;
    wait (rst_n);
    repeat (4200) @(negedge clk);   // descriptor structures clear themselves after reset
    forever begin
      @(negedge clk);
      if (req_valid && accepted) req_valid = 0;
      if (!req_valid && !gen_stop) begin
        automatic int ph = int'(dut.u_timer.cyc);
        // busy for the first 60% of a slot, quiet for the rest
        if (ph < SLOT * 6 / 10 && $urandom_range(0, 2) == 0) begin
          // hot pages mostly; cold pages on ranks 0..5; rarely any page
          cur_l = $urandom_range(0, 7);
          if ($urandom_range(0, 9) < 2)
            for (int t = 0; t < 20; t++) begin
              cur_l = $urandom_range(8, NPAGES - 1);
              if (rank_of(loc[cur_l]) < NR - 2 || $urandom_range(0, 99) == 0) break;
            end
          req_valid = 1;
          req = '{write: 1'($urandom_range(0, 1)), app: 1'b1, page: pt[cur_l], line: 6'($urandom)};
        end
      end
      #1;
      if (req_valid && !req_ready) c_fifo_full++;
    end
  end

  // ---- base controller and DRAM ----
  int busy_cnt [NR];
  initial begin
    iss_ready = 0; rank_busy_i = '0; mig_cmd_ready = 0; mig_cmd_done = 0; pend_done = 0;
    foreach (busy_cnt[r]) busy_cnt[r] = 0;
    forever begin
      @(negedge clk);
      for (int r = 0; r < NR; r++) begin
        rank_busy_i[r] = busy_cnt[r] > 0;
        if (busy_cnt[r] > 0) busy_cnt[r]--;
      end
      iss_ready     = $urandom_range(0, 3) != 0;
      mig_cmd_ready = $urandom_range(0, 2) != 0;
      mig_cmd_done  = 0;
      if (pend_done > 0 && $urandom_range(0, 3) == 0) begin mig_cmd_done = 1; pend_done--; end
      #1;
      if (iss_valid && iss_ready) begin
        automatic int l = inflight.pop_front();
        c_issued++;
        check(content.exists(iss_req.page) && content[iss_req.page] == l,
              $sformatf("request for page %0d reaches frame %0h", l, iss_req.page));
        check(int'(iss_rank) == rank_of(iss_req.page), "rank of the issued frame");
        check(rank_state[iss_rank] == PS_ACT && rank_ready[iss_rank], "issued to an active rank");
        if (iss_req.page != pt[l]) c_remapped++;
        busy_cnt[iss_rank] = 3;
      end
      if (mig_cmd_valid && mig_cmd_ready) begin
        automatic int sr = rank_of(mig_cmd.src_frame), dr = rank_of(mig_cmd.dst_frame);
        check(rank_ready[sr] && rank_ready[dr], "migration ranks active");
        if (mig_cmd.op == MIG_TO_BUF) rbuf[dr] = content[mig_cmd.src_frame];
        else begin
          content[mig_cmd.dst_frame] = rbuf[dr];
          if (rbuf[dr] >= 0) loc[rbuf[dr]] = mig_cmd.dst_frame;
          rbuf[dr] = -2;
        end
        pend_done++;
      end
      if (dut.h_valid && dut.blk_hit) c_blocked++;
    end
  end

  // Remapping Table model follows the inserts
  always @(posedge clk)
    if (rst_n && dut.remap_valid && dut.remap_ready) remap_m[dut.remap_page] = dut.remap_frame;

  // ---- MQ descriptor memory ----
  mq_desc_t dstore [page_t];
  initial begin
    mq_mem_rsp_valid = 0; mq_mem_rsp_desc = '0; mq_mem_req_ready = 0;
    forever begin
      @(negedge clk);
      mq_mem_rsp_valid = 0;
      mq_mem_req_ready = 1;
      #1;
      if (mq_mem_req_valid) begin
        automatic logic w = mq_mem_req_write;
        automatic page_t pg = mq_mem_req_page;
        automatic mq_desc_t dd = mq_mem_req_desc;
        @(negedge clk);
        mq_mem_req_ready = 0;
        if (w) dstore[pg] = dd;
        else begin
          repeat (2) @(negedge clk);
          mq_mem_rsp_desc = dstore.exists(pg) ? dstore[pg] : '0;
          mq_mem_rsp_valid = 1;
        end
      end
    end
  end

  // ---- idle periods reported per rank, per slot; low-power states entered ----
  int ev_short [NR][int];       // length -> count, current slot
  int ev_long  [NR][$];
  int fin_short [NR][int];
  int fin_long  [NR][$];
  for (genvar r = 0; r < NR; r++) begin : g_mon
    pstate_t prev;
    always @(posedge clk) begin
      if (rst_n) begin
        if (irq_slot) begin
          fin_short[r] = ev_short[r]; fin_long[r] = ev_long[r];
          ev_short[r].delete(); ev_long[r].delete();
        end else if (dut.g_rank[r].idle_end && dut.g_rank[r].u_hist.init_done) begin
          automatic int len = int'(dut.g_rank[r].idle_len);
          if (len <= SQ) begin
            if (ev_short[r].exists(len)) ev_short[r][len]++; else ev_short[r][len] = 1;
          end else ev_long[r].push_back(len);
        end
        if (rank_state[r] != prev && rank_state[r] != PS_ACT) c_state[rank_state[r]]++;
        prev = rank_state[r];
      end
    end
  end

  // ---- OS ----
  task automatic hist_read(int r, bit sel, int idx, output int v);
    os_hist_rd_en = 1; os_hist_rank = 3'(r); os_hist_sel = sel; os_hist_idx = 7'(idx);
    @(negedge clk);
    os_hist_rd_en = 0;
    #1 v = int'(os_hist_data);
  endtask

  task automatic read_histograms();
    for (int r = 0; r < NR; r++) begin
      automatic int v, nl = int'(os_hist_long_cnt[r]);
      for (int i = 0; i <= SQ; i++) begin
        hist_read(r, 0, i, v);
        check(v == (fin_short[r].exists(i) ? fin_short[r][i] : 0),
              $sformatf("rank %0d short[%0d]=%0d", r, i, v));
        c_hist_short += v;
      end
      check(nl == fin_long[r].size(), $sformatf("rank %0d long count %0d/%0d", r, nl, fin_long[r].size()));
      for (int i = 0; i < nl && i < fin_long[r].size(); i++) begin
        hist_read(r, 1, i, v);
        check(v == fin_long[r][i], "long idle length");
        c_hist_long++;
      end
    end
  endtask

  task automatic mig_write(int l, page_t dst, bit last);
    os_mig_wr_entry = '0;
    os_mig_wr_entry.os_page = pt[l];
    os_mig_wr_entry.src_frame = loc[l];
    os_mig_wr_entry.dst_frame = dst;
    os_mig_wr_entry.seg_end = last;
    os_mig_wr_valid = 1;
    #1;
    while (!os_mig_wr_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    os_mig_wr_valid = 0;
  endtask

  function automatic page_t free_frame(int r);
    for (int i = 0; i < (1 << RL); i++) begin
      automatic page_t f = page_t'((r << RL) | i);
      if (!content.exists(f) || content[f] < 0) return f;
    end
    return '0;
  endfunction

  // a page whose address would share a Remapping Table entry with another address
  // already remapped is not moved (only the test of the full interrupt does that)
  function automatic bit hash_free(int l);
    foreach (remap_m[a]) if (a != pt[l] && page_hash12(a) == page_hash12(pt[l])) return 0;
    foreach (planned[a]) if (a != pt[l] && page_hash12(a) == page_hash12(pt[l])) return 0;
    return 1;
  endfunction

  function automatic int page_in_rank(int r, bit used [int]);
    for (int t = 0; t < 40; t++) begin
      automatic int l = $urandom_range(0, NPAGES - 1);
      if (rank_of(loc[l]) == r && !used.exists(l) && hash_free(l)) begin
        planned[pt[l]] = 1;
        return l;
      end
    end
    return -1;
  endfunction

  // plan a few segments: cycles over distinct ranks, and single moves to free frames
  bit planned [page_t];
  task automatic plan_epoch();
    bit used [int];
    bit rused [int];
    int nseg = $urandom_range(1, 3);
    planned.delete();
    for (int s = 0; s < nseg; s++) begin
      if ($urandom_range(0, 1)) begin
        // cycle over k ranks
        int k = $urandom_range(2, 3);
        int rs [$], ls [$];
        for (int t = 0; t < 30 && rs.size() < k; t++) begin
          automatic int r = $urandom_range(0, NR - 1), l;
          if (rused.exists(r)) continue;
          l = page_in_rank(r, used);
          if (l < 0) continue;
          rs.push_back(r); ls.push_back(l); rused[r] = 1; used[l] = 1;
        end
        if (ls.size() < 2) continue;
        foreach (ls[i]) mig_write(ls[i], loc[ls[(i + 1) % ls.size()]], i == ls.size() - 1);
      end else begin
        int a = $urandom_range(0, NR - 1), b = $urandom_range(0, NR - 1), l;
        if (a == b || rused.exists(a) || rused.exists(b)) continue;
        l = page_in_rank(a, used);
        if (l < 0) continue;
        rused[a] = 1; rused[b] = 1; used[l] = 1;
        mig_write(l, free_frame(b), 1'b1);
        // reserve nothing more: the free frame is taken when the commit lands
      end
    end
  endtask

  task automatic drain();
    gen_stop = 1;
    while (req_valid || inflight.size() != 0) begin
      // a request held behind the stalled segment cannot leave before the commit
      if (!req_valid && inflight.size() == 1 && dut.h_valid && dut.blk_hit) break;
      @(negedge clk);
    end
  endtask

  // OS commit: fold the Remapping Table into the page table, then clear it
  task automatic commit();
    os_commit = 1;
    drain();
    foreach (remap_m[a]) begin
      automatic int l = addr2l[a];
      addr2l.delete(a);
      pt[l] = remap_m[a];
    end
    foreach (pt[l]) addr2l[pt[l]] = l;
    remap_m.delete();
    os_remap_clear = 1;
    @(negedge clk);
    os_remap_clear = 0;
    os_commit = 0;
    gen_stop = 0;
  endtask

  // remap full: a collision in the direct-mapped table
  initial begin
    forever begin
      @(negedge clk);
      if (irq_remap_full) begin c_remap_full++; commit(); end
    end
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic time_t dl [NUM_LP] = '{20, 60, 150, 400, 1200};
    gen_stop = 0;
    os_mq_freeze = 0; os_mq_rd_idx = '0; os_mig_wr_valid = 0; os_mig_wr_entry = '0; os_mig_go = 0;
    os_commit = 0; os_remap_clear = 0; os_remap_rd_idx = '0;
    os_dem_cfg_we = 0; os_dem_cfg_rank = '0; os_dem_cfg_idx = '0; os_dem_cfg_val = '0;
    os_hist_rd_en = 0; os_hist_sel = 0; os_hist_rank = '0; os_hist_idx = '0;
    os_stat_sel = '0; os_stat_rank = '0;
    foreach (rbuf[r]) rbuf[r] = -2;
    // pages spread over all ranks; the hot pages 0..7 on ranks 0..3
    for (int l = 0; l < NPAGES; l++) begin
      loc[l] = page_t'(((l % NR) << RL) | (l / NR));
      if (l < 8) loc[l] = page_t'(((l % 4) << RL) | (l / 4) | 'h40);
      pt[l] = loc[l]; content[loc[l]] = l; addr2l[pt[l]] = l;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < NR; r++)
      for (int i = 1; i <= NUM_LP; i++) begin
        os_dem_cfg_we = 1; os_dem_cfg_rank = 3'(r); os_dem_cfg_idx = PSTATE_W'(i);
        // the deep states (2043 and 18003 cycles to wake) only on ranks 6 and 7
        os_dem_cfg_val = (i == NUM_LP && r != NR - 1) || (i == NUM_LP - 1 && r < NR - 2) ? '1 : dl[i - 1];
        @(negedge clk);
      end
    os_dem_cfg_we = 0;
    while (c_epochs < EPOCHS) begin
      @(negedge clk);
      if (irq_slot) begin
        c_slots++;
        if (irq_epoch) c_epochs++;
        repeat (2) @(negedge clk);
        read_histograms();
      end
    end
    gen_stop = 1;
    drain();
    while (mig_busy) @(negedge clk);
    // report
    begin
      automatic int n_rs = 0;
      automatic int promos = int'(dut.u_mq.n_promotions), dems = int'(dut.u_mq.n_demotions);
      automatic int miss = int'(dut.u_mq.n_misses), prec = int'(dut.u_mq_upd.precluded);
      automatic int segs = int'(dut.u_mig.n_segments);
      n_rs += int'(dut.g_rank[0].u_dem.n_resyncs); n_rs += int'(dut.g_rank[1].u_dem.n_resyncs);
      n_rs += int'(dut.g_rank[2].u_dem.n_resyncs); n_rs += int'(dut.g_rank[3].u_dem.n_resyncs);
      n_rs += int'(dut.g_rank[4].u_dem.n_resyncs); n_rs += int'(dut.g_rank[5].u_dem.n_resyncs);
      n_rs += int'(dut.g_rank[6].u_dem.n_resyncs); n_rs += int'(dut.g_rank[7].u_dem.n_resyncs);
      $display("issued=%0d remapped=%0d blocked_cycles=%0d fifo_full_cycles=%0d", c_issued, c_remapped, c_blocked, c_fifo_full);
      $display("wakeups=%0d entries into S1..S5: %0d %0d %0d %0d %0d", n_rs, c_state[1], c_state[2], c_state[3], c_state[4], c_state[5]);
      $display("segments=%0d mq: promotions=%0d demotions=%0d misses=%0d precluded=%0d writebacks=%0d",
               segs, promos, dems, miss, prec, dstore.size());
      $display("slots=%0d epochs=%0d hist short=%0d long=%0d remap_full=%0d", c_slots, c_epochs, c_hist_short, c_hist_long, c_remap_full);
      check(c_issued > 300, "requests issued");
      check(c_remapped > 0, "remapped requests");
      check(c_blocked > 0, "requests held behind a migration");
      check(c_fifo_full > 0, "request FIFO full");
      check(n_rs > 0, "rank wake-ups");
      for (int i = 1; i <= NUM_LP; i++) check(c_state[i] > 0, $sformatf("low-power state %0d entered", i));
      check(segs > 0, "migration segments");
      check(promos > 0 && dems > 0 && miss > 0 && dstore.size() > 0, "MQ promotion, demotion, miss, write-back");
      check(prec > 0, "precluded duplicate updates");
      check(c_hist_short > 0 && c_hist_long > 0, "short and long idle periods");
      check(c_slots > 0 && c_epochs > 0, "slot and epoch interrupts");
      check(c_remap_full > 0, "Remapping Table full interrupt");
      // statistics port
      os_stat_sel = 5'd10; @(negedge clk); @(negedge clk);
      check(int'(os_stat_data) == c_remapped, $sformatf("remapped requests statistic %0d/%0d", os_stat_data, c_remapped));
      os_stat_sel = 5'd11; @(negedge clk); @(negedge clk);
      check(int'(os_stat_data) == segs, "segments statistic");
      begin
        automatic int sum = 0;
        for (int r = 0; r < NR; r++) begin
          os_stat_sel = 5'd16; os_stat_rank = 3'(r); @(negedge clk); @(negedge clk);
          sum += int'(os_stat_data);
          os_stat_sel = 5'd24; @(negedge clk); @(negedge clk);
          if (r == NR - 1) check(os_stat_data > 0, "cycles in S5 on rank 7");
        end
        // compared with the controllers' own counters: a last migration may still wake ranks
        n_rs = int'(dut.g_rank[0].u_dem.n_resyncs) + int'(dut.g_rank[1].u_dem.n_resyncs) +
               int'(dut.g_rank[2].u_dem.n_resyncs) + int'(dut.g_rank[3].u_dem.n_resyncs) +
               int'(dut.g_rank[4].u_dem.n_resyncs) + int'(dut.g_rank[5].u_dem.n_resyncs) +
               int'(dut.g_rank[6].u_dem.n_resyncs) + int'(dut.g_rank[7].u_dem.n_resyncs);
        check(sum == n_rs, $sformatf("wake-up statistics %0d/%0d", sum, n_rs));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // at each epoch: plan migrations (once per epoch), and in the second epoch a pair
  // of moves whose addresses share a Remapping Table entry
  int epoch_done = 0;
  bit coll_done = 0;
  initial begin
    wait (rst_n);
    forever begin
      @(negedge clk);
      if (c_epochs > epoch_done && !mig_busy) begin
        epoch_done = c_epochs;
        if (epoch_done >= 2 && !coll_done) begin
          // rank 4 frame 0x1003 and rank 0 frame 0x002 share a table entry
          automatic int la = addr2l.exists(22'h1003) ? addr2l[22'h1003] : -1;
          automatic int lb = addr2l.exists(22'h0002) ? addr2l[22'h0002] : -1;
          coll_done = 1;
          if (la >= 0 && lb >= 0 && !remap_m.exists(pt[la]) && !remap_m.exists(pt[lb])) begin
            drain();
            mig_write(la, free_frame(5), 1'b1);
            mig_write(lb, free_frame(6), 1'b1);
          end else plan_epoch();
        end else plan_epoch();
        os_mig_go = 1;
        @(negedge clk);
        os_mig_go = 0;
        while (mig_busy) @(negedge clk);
        gen_stop = 0;
      end
    end
  end
endmodule
