// tb_ramzzz_mc_full: the controller at its default size (8 ranks of 65536 frames,
// 4096-entry MQ cache and Remapping Table, 1024-entry migration queue, slots of
// 1e8 cycles, histograms of 2 x 10^4 counters) taken through one complete
// operation: the reset-time clearing of the descriptor structures and histograms,
// the demotion configuration, traffic, the demotion of an idle rank into each of
// the five low-power states and its wake-up, and one migration epoch (the
// three-rank cycle of the paper's example plus a move into a free frame) with
// requests to the moving pages held and then remapped.
//
// Checked: every request reaches the frame that holds its page (a model of the
// frame contents follows the migration commands), is issued to an active rank,
// the state a rank is in after an idle gap, and the wake-up time from each state:
// ready rises RESYNC+1 cycles after the request reaches the rank's demotion
// controller (16, 48, 64, 2043, 18003 cycles for the DDR3 states). A slot of 1e8
// cycles is too long to simulate here, so the slot interrupt and the histogram
// read-out are covered only by the reduced-size end-to-end test.
module tb_ramzzz_mc_full;
  import ramzzz_pkg::*;
  localparam int NR = 8, RL = 16, NPAGES = 32;
  localparam int RS [NUM_LP] = '{16, 48, 64, 2043, 18003};
  localparam int DL [NUM_LP] = '{10, 40, 100, 400, 2000};

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
  page_t loc [NPAGES], pt [NPAGES];
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

  // ---- wake-up time of rank 2: from the request reaching it to ready ----
  int wake_start = -1, wake_len = -1, cyc = 0;
  pstate_t wake_from;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && dut.g_rank[2].access_req && !rank_ready[2] && wake_start < 0) begin
      wake_start = cyc; wake_from = rank_state[2];
    end
    if (rank_ready[2] && wake_start >= 0) begin
      wake_len = cyc - wake_start; wake_start = -1;
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
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

  initial begin
    os_mq_freeze = 0; os_mq_rd_idx = '0; os_mig_wr_valid = 0; os_mig_wr_entry = '0; os_mig_go = 0;
    os_commit = 0; os_remap_clear = 0; os_remap_rd_idx = '0;
    os_dem_cfg_we = 0; os_dem_cfg_rank = '0; os_dem_cfg_idx = '0; os_dem_cfg_val = '0;
    os_hist_rd_en = 0; os_hist_sel = 0; os_hist_rank = '0; os_hist_idx = '0;
    os_stat_sel = '0; os_stat_rank = '0;
    foreach (rbuf[r]) rbuf[r] = -2;
    for (int l = 0; l < NPAGES; l++) begin
      loc[l] = page_t'(((l % NR) << RL) | (l / NR));
      pt[l] = loc[l]; content[loc[l]] = l;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // the histograms and the MQ structures clear themselves
    while (!dut.g_rank[7].init_done) @(negedge clk);
    check(cyc >= 10001, "histogram clearing sweep of SQRT_T+1 cycles");
    for (int r = 0; r < NR; r++)
      for (int i = 1; i <= NUM_LP; i++) begin
        // the two deep states stay disabled, except on rank 2 for its test below
        os_dem_cfg_we = 1; os_dem_cfg_rank = 3'(r); os_dem_cfg_idx = PSTATE_W'(i);
        os_dem_cfg_val = (i >= 4) ? '1 : DL[i - 1];
        @(negedge clk);
      end
    os_dem_cfg_we = 0;
    // warm-up traffic to all pages
    for (int n = 0; n < 300; n++) todo.push_back($urandom_range(0, NPAGES - 1));
    wait_drained();
    // rank 2 (pages 2, 10, 18, 26): idle gaps that end in each low-power state
    for (int i = 4; i <= NUM_LP; i++) begin
      os_dem_cfg_we = 1; os_dem_cfg_rank = 3'd2; os_dem_cfg_idx = PSTATE_W'(i); os_dem_cfg_val = DL[i - 1];
      @(negedge clk);
    end
    os_dem_cfg_we = 0;
    todo.push_back(2);
    wait_drained();
    for (int k = 1; k <= NUM_LP; k++) begin
      repeat (DL[k - 1] + 6) @(negedge clk);
      check(rank_state[2] == pstate_t'(k), $sformatf("rank 2 in state %0d after %0d idle cycles (is %0d)",
                                                      k, DL[k - 1] + 6, rank_state[2]));
      wake_len = -1;
      todo.push_back(2);
      wait_drained();
      check(wake_from == pstate_t'(k) && wake_len == RS[k - 1] + 1,
            $sformatf("wake-up from state %0d took %0d cycles, expected %0d", k, wake_len, RS[k - 1] + 1));
    end
    // one migration epoch: the example cycle page 0 (rank 0) -> rank 1 -> rank 2 -> rank 0,
    // and page 5 (rank 5) into a free frame of rank 7
    mig_write(0, loc[1], 1'b0);
    mig_write(1, loc[2], 1'b0);
    mig_write(2, loc[0], 1'b1);
    mig_write(5, page_t'((7 << RL) | 'h100), 1'b1);
    os_mig_go = 1;
    @(negedge clk);
    os_mig_go = 0;
    // requests to the moving pages while the migration runs
    for (int n = 0; n < 200; n++) todo.push_back((n % 3 == 0) ? $urandom_range(0, 2) : $urandom_range(0, NPAGES - 1));
    while (mig_busy) @(negedge clk);
    wait_drained();
    check(loc[0] == page_t'(1 << RL) && loc[1] == page_t'(2 << RL) && loc[2] == page_t'(0) &&
          loc[5] == page_t'((7 << RL) | 'h100), "pages at their new frames");
    for (int n = 0; n < 100; n++) todo.push_back($urandom_range(0, 5));
    wait_drained();
    check(int'(dut.u_mig.n_segments) == 2 && int'(dut.u_mig.n_migrations) == 4, "two segments, four moves");
    check(c_remapped > 0, "requests remapped");
    check(int'(dut.u_mq.n_hits) > 0, "MQ updates applied");
    $display("issued=%0d remapped=%0d blocked_cycles=%0d mq_hits=%0d cycles=%0d",
             c_issued, c_remapped, c_blocked, dut.u_mq.n_hits, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
