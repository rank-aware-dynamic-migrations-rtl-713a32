// tb_migration_engine: self-checking test of migration_engine with 4 ranks of 16
// frames. Each epoch the testbench writes a set of segments (paths or cycles over
// distinct ranks, so that no rank sends or receives twice in one segment) and starts
// the engine. The first epoch is the three-rank cycle of the paper's example
// (page 6: rank 0 -> 1, page 4: rank 1 -> 2, page 2: rank 2 -> 0) behind a shorter
// segment, so longest-first order is visible. The testbench acts as the ranks and
// the Remapping Table with random ready/done timing and random idle indications,
// and checks:
//  - segments are executed longest first (first written wins a tie);
//  - phase A (copy to the destination's extra buffer) sends every move of the
//    segment in order, then phase B (commit) sends them again, and no commit is
//    issued before every phase-A command has completed;
//  - each command's ranks are woken and active, and a segment starts only after a
//    cycle with sched_ok high and hold low;
//  - the remapping pairs (page, destination frame) follow in order;
//  - blk_hit is high for a page of the running segment and low for other pages;
//  - the counters and busy at the end of each epoch.
module tb_migration_engine;
  import ramzzz_pkg::*;
  localparam int NR = 4, RL = 4;
  logic clk = 0, rst_n = 0;
  logic os_wr_valid, os_wr_ready, os_go, hold, sched_ok;
  mig_entry_t os_wr_entry;
  logic [NR-1:0] rank_wake, rank_active, rank_ready;
  logic cmd_valid, cmd_ready, cmd_done, remap_valid, remap_ready, blk_hit, busy;
  mig_cmd_t cmd;
  page_t remap_page, remap_frame, blk_page;
  logic [31:0] n_segments, n_migrations;
  int checks = 0, failures = 0;

  migration_engine #(.QDEPTH(64), .MAX_SEGS(16), .NUM_RANKS(NR), .RANK_LSB(RL)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  typedef struct { page_t pg; page_t src; page_t dst; } mv_t;
  mv_t segs [$][$];             // segments of the epoch, as written
  int  order [$];               // expected execution order (indices into segs)

  function automatic page_t frame(int r);
    return page_t'((r << RL) | $urandom_range(0, (1 << RL) - 1));
  endfunction

  // one random segment: a path or a cycle over distinct ranks
  function automatic void add_random_seg(int pbase);
    int perm [NR];
    int len, cyc;
    mv_t s [$];
    foreach (perm[i]) perm[i] = i;
    for (int i = NR - 1; i > 0; i--) begin
      int k = $urandom_range(0, i);
      int t = perm[i]; perm[i] = perm[k]; perm[k] = t;
    end
    cyc = $urandom_range(0, 1);
    len = cyc ? $urandom_range(2, NR) : $urandom_range(1, NR - 1);
    for (int k = 0; k < len; k++) begin
      mv_t m;
      m.pg  = page_t'(pbase + k);
      m.src = frame(perm[k]);
      m.dst = frame((cyc && k == len - 1) ? perm[0] : perm[k + 1]);
      s.push_back(m);
    end
    segs.push_back(s);
  endfunction

  function automatic void make_order();
    bit used [int];
    order.delete();
    for (int n = 0; n < segs.size(); n++) begin
      int b = -1;
      foreach (segs[i]) if (!used.exists(i) && (b < 0 || segs[i].size() > segs[b].size())) b = i;
      used[b] = 1; order.push_back(b);
    end
  endfunction

  // ---- the environment: ranks, commands, remapping, blocking probe ----
  int  cur;                     // position in order[] of the running segment
  int  a_idx, b_idx, r_idx, pend_done, a_done;
  bit  seg_started;
  bit  prev_ok;
  int  rdy_cnt [NR];
  bit  env_on;
  int  n_blk_hits;

  initial begin
    cmd_ready = 0; cmd_done = 0; remap_ready = 0; rank_ready = '0;
    hold = 0; sched_ok = 0; blk_page = '0; prev_ok = 0;
    foreach (rdy_cnt[r]) rdy_cnt[r] = 0;
    n_blk_hits = 0;
    forever begin
      @(negedge clk);
      // ranks: wake after a few cycles, may fall asleep when not needed
      for (int r = 0; r < NR; r++) begin
        if (rank_wake[r]) begin
          if (!rank_ready[r]) begin
            if (rdy_cnt[r] == 0) rank_ready[r] = 1; else rdy_cnt[r]--;
          end
        end else if ($urandom_range(0, 9) == 0) begin
          rank_ready[r] = 0; rdy_cnt[r] = $urandom_range(0, 6);
        end else if ($urandom_range(0, 9) == 0) rank_ready[r] = 1;
      end
      cmd_done = 0;
      if (pend_done > 0 && $urandom_range(0, 2) == 0) begin cmd_done = 1; pend_done--; end
      cmd_ready   = $urandom_range(0, 2) != 0;
      remap_ready = $urandom_range(0, 2) != 0;
      sched_ok    = $urandom_range(0, 3) != 0;
      hold        = $urandom_range(0, 7) == 0;
      // blocking probe: a page of the running segment or an unrelated page
      if (env_on && seg_started && cur < order.size() && $urandom_range(0, 1)) begin
        blk_page = segs[order[cur]][$urandom_range(0, segs[order[cur]].size() - 1)].pg;
        #1;
        check(blk_hit, "page of the running segment blocked");
        n_blk_hits++;
      end else begin
        blk_page = page_t'($urandom_range(5000, 6000));
        #1;
        check(!blk_hit, "unrelated page not blocked");
      end
      if (env_on && cur < order.size()) begin
        automatic mv_t s [$] = segs[order[cur]];
        if (cmd_valid && !seg_started) begin
          check(prev_ok, "segment started in an idle cycle without hold");
          seg_started = 1;
        end
        if (cmd_valid && cmd_ready) begin
          automatic mv_t m;
          if (a_idx < s.size()) begin
            m = s[a_idx];
            check(cmd.op == MIG_TO_BUF, "phase A command");
            a_idx++;
          end else begin
            m = s[b_idx];
            check(cmd.op == MIG_COMMIT, "phase B command");
            check(a_done == s.size(), "commit only after all copies completed");
            b_idx++;
          end
          check(cmd.src_frame == m.src && cmd.dst_frame == m.dst,
                $sformatf("command frames seg %0d", order[cur]));
          check(rank_active[m.src >> RL] && rank_active[m.dst >> RL], "ranks of command active");
          check((rank_ready & rank_active) == rank_active, "active ranks ready");
          pend_done++;
        end
        if (cmd_done && b_idx == 0) a_done++;
        if (remap_valid && remap_ready) begin
          check(b_idx == s.size(), "remap after commits");
          check(remap_page == s[r_idx].pg && remap_frame == s[r_idx].dst, "remap pair");
          r_idx++;
          if (r_idx == s.size()) begin
            cur++; a_idx = 0; b_idx = 0; r_idx = 0; a_done = 0; seg_started = 0;
          end
        end
      end else if (env_on) begin
        check(!cmd_valid && !remap_valid, "nothing after the last segment");
      end
      // a segment may start at the next edge only if this cycle allows it
      prev_ok = sched_ok && !hold;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_epoch();
    int total = 0;
    logic [31:0] s0 = n_segments, m0 = n_migrations;
    make_order();
    cur = 0; a_idx = 0; b_idx = 0; r_idx = 0; pend_done = 0; a_done = 0; seg_started = 0;
    foreach (segs[i]) begin
      foreach (segs[i][k]) begin
        os_wr_valid = 1;
        os_wr_entry = '0;
        os_wr_entry.os_page   = segs[i][k].pg;
        os_wr_entry.src_frame = segs[i][k].src;
        os_wr_entry.dst_frame = segs[i][k].dst;
        os_wr_entry.seg_end   = (k == segs[i].size() - 1);
        #1;
        check(os_wr_ready, "queue accepts entries while idle");
        @(negedge clk);
        total++;
      end
    end
    os_wr_valid = 0;
    env_on = 1;
    os_go = 1;
    @(negedge clk);
    os_go = 0;
    check(busy, "busy after go");
    while (busy) @(negedge clk);
    env_on = 0;
    check(cur == segs.size(), $sformatf("all segments done (%0d of %0d)", cur, segs.size()));
    check(n_segments - s0 == segs.size() && n_migrations - m0 == total, "counters");
  endtask

  initial begin
    mv_t s [$];
    os_wr_valid = 0; os_wr_entry = '0; os_go = 0; env_on = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // epoch 1: a single move, then the three-rank cycle of the example
    s.push_back('{pg: 22'd9, src: 22'h00003, dst: 22'h00035});
    segs.push_back(s);
    s.delete();
    s.push_back('{pg: 22'd6, src: 22'h00001, dst: 22'h00012});
    s.push_back('{pg: 22'd4, src: 22'h00012, dst: 22'h00024});
    s.push_back('{pg: 22'd2, src: 22'h00024, dst: 22'h00001});
    segs.push_back(s);
    run_epoch();
    // random epochs
    for (int e = 0; e < 60; e++) begin
      segs.delete();
      for (int k = 0, n = $urandom_range(1, 8); k < n; k++) add_random_seg(100 * k + 1);
      run_epoch();
    end
    check(n_blk_hits > 0, "blocking observed");
    $display("segments=%0d migrations=%0d", n_segments, n_migrations);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
