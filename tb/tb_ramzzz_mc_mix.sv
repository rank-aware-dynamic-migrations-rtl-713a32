// tb_ramzzz_mc_mix: the default-size controller under the six four-application
// SPEC 2006 mixes of the reference evaluation, M1..M6. Each mix is reduced to its two
// published figures: the memory footprint (661.3, 1477.4, 626.6, 537.8, 1082.9 and
// 988.2 MB, i.e. 138k..378k pages of 4 KB) and the mean number of memory accesses
// per 5e8 cycles (0.6, 1.7, 2.9, 3.5, 4.4 and 7.8 million, one access every 833 down
// to 64 cycles). Pages are interleaved over the 8 ranks; 80% of the accesses go to
// 1024 hot pages, 128 on every rank. The shallow states S1..S3 are enabled
// (timeouts 10, 40, 100 cycles).
//
// Every mix runs after a fresh reset in two epochs of WINDOW/2 cycles. Between them
// the testbench acts as the OS grouping step: it moves the 512 hot pages of ranks
// 4..7 into free frames of ranks 0..3, as 128 segments of four moves (4->0, 5->1,
// 6->2, 7->3), while the traffic goes on. The hot pages are chosen so that their page
// numbers fall into distinct Remapping Table slots; the commit on a collision is
// covered by tb_ramzzz_mc.
//
// Checked: every request reaches the frame holding its page, on an active rank; all
// requests complete; every hot page ends at its new frame; requests to moved pages
// are remapped; ranks 4..7 wake up less often in the second epoch than in the first.
// Reported per mix: requests, remapped requests, MQ hits and misses, the share of
// rank time in each power state, and the wake-ups and low-power residency of ranks
// 4..7 before and after the grouping. The access order is synthetic: only the
// footprint and rate come from the workload description.
module tb_ramzzz_mc_mix;
  import ramzzz_pkg::*;
  localparam int NR = 8, RL = 16, NPAGES = 400000;

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
  logic [13:0] os_hist_idx;
  logic [31:0] os_hist_data;
  logic [13:0] os_hist_long_cnt [NR];
  logic irq_slot, irq_epoch;
  logic [4:0] os_stat_sel;
  logic [2:0] os_stat_rank;
  logic [31:0] os_stat_data;

  ramzzz_mc dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s @%0t", what, $time); end
  endtask
  function automatic int rank_of(page_t f); return int'(f >> RL); endfunction

  int    content [page_t];
  page_t loc [int], pt [int];
  int    rbuf [NR];
  int    inflight [$];
  int    pend_done, c_issued, c_remapped, c_blocked;

  // ---- processor: one request at a time from a queue of logical pages ----
  int  todo [$];
  int  cur_l;
  logic accepted;
  always @(posedge clk) begin
    accepted <= req_valid && req_ready;
    if (req_valid && req_ready) inflight.push_back(cur_l);
  end
  initial begin
    req_valid = 0; req = '0;
    forever begin
      @(negedge clk);
      if (req_valid && accepted) req_valid = 0;
      if (!req_valid && todo.size() > 0) begin
        cur_l = todo.pop_front();
        req_valid = 1;
        req = '{write: 1'($urandom_range(0, 1)), app: 1'b1, page: pt[cur_l], line: 6'($urandom)};
      end
    end
  end

  // ---- base controller, DRAM and migration buffers ----
  initial begin
    iss_ready = 0; rank_busy_i = '0; mig_cmd_ready = 0; mig_cmd_done = 0; pend_done = 0;
    forever begin
      @(negedge clk);
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
      end
      if (mig_cmd_valid && mig_cmd_ready) begin
        automatic int dr = rank_of(mig_cmd.dst_frame);
        check(rank_ready[rank_of(mig_cmd.src_frame)] && rank_ready[dr], "migration ranks active");
        if (mig_cmd.op == MIG_TO_BUF) rbuf[dr] = content[mig_cmd.src_frame];
        else begin
          content[mig_cmd.dst_frame] = rbuf[dr];
          if (rbuf[dr] >= 0) loc[rbuf[dr]] = mig_cmd.dst_frame;
        end
        pend_done++;
      end
      if (dut.h_valid && dut.blk_hit) c_blocked++;
    end
  end

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

  localparam int WINDOW = 150000;
  localparam int HOT = 1024;              // hot pages: 80% of the accesses
  localparam int FREE0 = 60000;           // first free frame index in every rank
  localparam real FP_MB [6] = '{661.3, 1477.4, 626.6, 537.8, 1082.9, 988.2};
  localparam real MEAN  [6] = '{0.6, 1.7, 2.9, 3.5, 4.4, 7.8};
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (WINDOW * 8) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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

  task automatic wait_drained();
    while (req_valid || todo.size() != 0 || inflight.size() != 0) @(negedge clk);
  endtask

  // hot page x (0..HOT-1) is logical page 1024*(x/8) + x%8: rank x%8, frame 128*(x/8).
  // The page numbers of the moved ones then fall into distinct Remapping Table
  // slots, so the epoch needs no commit.
  function automatic int hot_l(int x); return 1024 * (x / NR) + x % NR; endfunction

  // wake-ups of ranks 4..7, their cycles in S1..S5, and in all states
  task automatic upper_cycles(output longint wk, output longint lp, output longint all);
    wk = dut.g_rank[4].n_resyncs + dut.g_rank[5].n_resyncs + dut.g_rank[6].n_resyncs +
         dut.g_rank[7].n_resyncs;
    lp = 0; all = 0;
    for (int i = 0; i <= NUM_LP; i++) begin
      all += dut.g_rank[4].state_cycles[i] + dut.g_rank[5].state_cycles[i] +
             dut.g_rank[6].state_cycles[i] + dut.g_rank[7].state_cycles[i];
      if (i > 0) lp += dut.g_rank[4].state_cycles[i] + dut.g_rank[5].state_cycles[i] +
                       dut.g_rank[6].state_cycles[i] + dut.g_rank[7].state_cycles[i];
    end
  endtask

  // application traffic for n cycles: one access every `gap` cycles on average,
  // 80% of them to the hot pages
  task automatic traffic(int n, int gap, int npages);
    automatic int start = cyc;
    while (cyc - start < n) begin
      repeat ($urandom_range(1, 2 * gap - 1)) @(negedge clk);
      todo.push_back(($urandom_range(0, 9) < 8) ? hot_l($urandom_range(0, HOT - 1)) : $urandom_range(0, npages - 1));
    end
  endtask

  initial begin
    os_mq_freeze = 0; os_mq_rd_idx = '0; os_mig_wr_valid = 0; os_mig_wr_entry = '0; os_mig_go = 0;
    os_commit = 0; os_remap_clear = 0; os_remap_rd_idx = '0;
    os_dem_cfg_we = 0; os_dem_cfg_rank = '0; os_dem_cfg_idx = '0; os_dem_cfg_val = '0;
    os_hist_rd_en = 0; os_hist_sel = 0; os_hist_rank = '0; os_hist_idx = '0;
    os_stat_sel = '0; os_stat_rank = '0;
    for (int w = 0; w < 6; w++) begin
      automatic int npages = int'(FP_MB[w] * 256.0);
      automatic int gap = int'(500.0 / MEAN[w]);       // cycles between accesses
      automatic int issued0, remapped0;
      automatic longint wk0, wk1, wk2, wk3, lp0, all0, lp1, all1, lp2, all2, lp3, all3;
      automatic longint st_sum [NUM_LP+1];
      content.delete(); loc.delete(); pt.delete();
      for (int l = 0; l < npages; l++) begin
        loc[l] = page_t'(((l % NR) << RL) | (l / NR));
        pt[l] = loc[l]; content[loc[l]] = l;
      end
      rst_n = 0;
      repeat (3) @(negedge clk);
      rst_n = 1;
      while (!dut.g_rank[7].init_done) @(negedge clk);
      for (int r = 0; r < NR; r++)
        for (int i = 1; i <= NUM_LP; i++) begin
          os_dem_cfg_we = 1; os_dem_cfg_rank = 3'(r); os_dem_cfg_idx = PSTATE_W'(i);
          os_dem_cfg_val = (i == 1) ? 10 : (i == 2) ? 40 : (i == 3) ? 100 : '1;
          @(negedge clk);
        end
      os_dem_cfg_we = 0;
      issued0 = c_issued; remapped0 = c_remapped;
      // epoch 1: hot pages spread over all eight ranks
      upper_cycles(wk0, lp0, all0);
      traffic(WINDOW / 2, gap, npages);
      upper_cycles(wk1, lp1, all1);
      // the OS groups the hot pages into ranks 0..3: the hot pages of ranks 4..7 move
      // to free frames of ranks 0..3, four moves (4->0, 5->1, 6->2, 7->3) per segment
      for (int g = 0; g < HOT / NR; g++)
        for (int k = 0; k < 4; k++)
          mig_write(hot_l(NR * g + 4 + k), page_t'((k << RL) | (FREE0 + g)), k == 3);
      os_mig_go = 1;
      @(negedge clk);
      os_mig_go = 0;
      while (mig_busy) traffic(100, gap, npages);
      wait_drained();
      for (int g = 0; g < HOT / NR; g++)
        for (int k = 0; k < 4; k++)
          check(loc[hot_l(NR * g + 4 + k)] == page_t'((k << RL) | (FREE0 + g)), "hot page at its new frame");
      check(int'(dut.u_mig.n_migrations) == HOT / 2 && int'(dut.u_mig.n_segments) == HOT / NR,
            "all migrations carried out");
      // epoch 2: ranks 4..7 only see the cold accesses
      upper_cycles(wk2, lp2, all2);
      traffic(WINDOW / 2, gap, npages);
      wait_drained();
      upper_cycles(wk3, lp3, all3);
      check(todo.size() == 0 && inflight.size() == 0, "all requests completed");
      check(c_remapped > remapped0, "requests to migrated pages remapped");
      check(wk3 - wk2 < wk1 - wk0, "ranks 4..7 wake up less often after the grouping");
      foreach (st_sum[i]) st_sum[i] = 0;
      for (int i = 0; i <= NUM_LP; i++) begin
        st_sum[i] += dut.g_rank[0].state_cycles[i]; st_sum[i] += dut.g_rank[1].state_cycles[i];
        st_sum[i] += dut.g_rank[2].state_cycles[i]; st_sum[i] += dut.g_rank[3].state_cycles[i];
        st_sum[i] += dut.g_rank[4].state_cycles[i]; st_sum[i] += dut.g_rank[5].state_cycles[i];
        st_sum[i] += dut.g_rank[6].state_cycles[i]; st_sum[i] += dut.g_rank[7].state_cycles[i];
      end
      begin
        automatic longint tot = 0;
        foreach (st_sum[i]) tot += st_sum[i];
        check(st_sum[1] + st_sum[2] + st_sum[3] > 0, "ranks used the low-power states");
        $display("M%0d: %0d pages, one access per %0d cycles: requests=%0d remapped=%0d mq hits=%0d misses=%0d  all ranks ACT %0d%% S1 %0d%% S2 %0d%% S3 %0d%%; ranks 4..7 before/after grouping: %0d/%0d wake-ups, low-power %0d/%0d permille",
                 w + 1, npages, gap, c_issued - issued0, c_remapped - remapped0, dut.u_mq.n_hits, dut.u_mq.n_misses,
                 100 * st_sum[0] / tot, 100 * st_sum[1] / tot, 100 * st_sum[2] / tot, 100 * st_sum[3] / tot,
                 wk1 - wk0, wk3 - wk2, 1000 * (lp1 - lp0) / (all1 - all0), 1000 * (lp3 - lp2) / (all3 - all2));
      end
      check(dut.u_mq.n_misses > 0, "descriptor cache misses with a large footprint");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
