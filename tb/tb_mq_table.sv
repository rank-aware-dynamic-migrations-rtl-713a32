// tb_mq_table: self-checking test of mq_table (4096 entries, LIFETIME = 40). An
// independent model of the MQ policy (16 ordered queues, head = most recent,
// promotion from queue i when the counter reaches 2^(i+1), demotion of a queue's
// tail after more than LIFETIME updates without access) and of a direct-mapped
// descriptor cache backed by DRAM is run beside the design. The testbench plays
// DRAM: it stores written-back descriptors and answers fetches after a few cycles.
// After every update the design's linked lists are walked from each head and
// compared with the model (order, counters, queue numbers); written-back
// descriptors and the statistics counters are compared too. The page set contains
// pairs of pages that share a cache slot, so misses and write-backs happen.
module tb_mq_table;
  import ramzzz_pkg::*;
  localparam int LIFE = 40;
  logic clk = 0, rst_n = 0;
  logic upd_valid, upd_ready, os_freeze, busy;
  page_t upd_page;
  logic mem_req_valid, mem_req_ready, mem_req_write, mem_rsp_valid;
  page_t mem_req_page;
  mq_desc_t mem_req_desc, mem_rsp_desc, os_rd_desc;
  logic [11:0] os_rd_idx;
  logic [PTR_W-1:0] os_head [16], os_tail [16];
  logic [31:0] n_hits, n_misses, n_promotions, n_demotions;
  int checks = 0, failures = 0;

  mq_table #(.ENTRIES(4096), .QUEUES(16), .LIFETIME(LIFE)) dut (.*);
  always #5 clk = ~clk;

  // ---- model ----
  typedef struct { int refcnt; int q; longint last; } d_t;
  d_t    md [page_t];          // descriptors of cached pages
  d_t    dram [page_t];        // descriptors in DRAM
  page_t slot [int];           // cache slot -> page
  page_t lists [16][$];        // per queue, index 0 = head
  longint now = 0;
  int e_hits = 0, e_miss = 0, e_prom = 0, e_dem = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  function automatic void list_remove(int q, page_t p);
    foreach (lists[q][i]) if (lists[q][i] == p) begin lists[q].delete(i); return; end
  endfunction

  task automatic model_update(page_t p);
    int s = int'(page_hash12(p));
    d_t d;
    now++;
    if (slot.exists(s) && slot[s] != p) begin
      page_t v = slot[s];
      list_remove(md[v].q, v);
      dram[v] = md[v];
      md.delete(v);
      slot.delete(s);
    end
    if (slot.exists(s)) begin
      e_hits++;
      d = md[p];
      list_remove(d.q, p);
    end else begin
      e_miss++;
      if (dram.exists(p)) d = dram[p]; else d = '{refcnt: 0, q: 0, last: 0};
    end
    if (d.refcnt < (1 << 14) - 1) d.refcnt++;
    d.last = now;
    if (d.q < 15 && d.refcnt >= (1 << (d.q + 1))) begin d.q++; e_prom++; end
    md[p] = d; slot[s] = p;
    lists[d.q].push_front(p);
    for (int k = 1; k < 16; k++) begin
      if (lists[k].size() > 0) begin
        page_t t = lists[k][lists[k].size() - 1];
        if (now - md[t].last > LIFE) begin
          void'(lists[k].pop_back());
          md[t].q = k - 1; md[t].last = now;
          lists[k - 1].push_front(t);
          e_dem++;
        end
      end
    end
  endtask

  // compare the design's lists with the model
  task automatic compare_lists();
    for (int q = 0; q < 16; q++) begin
      logic [PTR_W-1:0] p = dut.head[q];
      int n = 0;
      while (p != PTR_NIL && n < 4096) begin
        mq_desc_t e = dut.tab[p[11:0]];
        check(n < lists[q].size() && e.page == lists[q][n], $sformatf("queue %0d position %0d", q, n));
        if (n < lists[q].size() && e.page == lists[q][n]) begin
          check(int'(e.refcnt) == md[e.page].refcnt && int'(e.qnum) == q, "descriptor fields");
          if (n == lists[q].size() - 1) check(dut.tail[q] == p, "tail pointer");
        end
        p = e.next; n++;
      end
      check(n == lists[q].size(), $sformatf("queue %0d length %0d want %0d", q, n, lists[q].size()));
    end
    foreach (dram[pg])
      check(dram_store.exists(pg) && int'(dram_store[pg].refcnt) == dram[pg].refcnt
            && int'(dram_store[pg].qnum) == dram[pg].q, "written-back descriptor");
  endtask

  // ---- DRAM responder ----
  mq_desc_t dram_store [page_t];
  initial begin
    mem_rsp_valid = 0; mem_rsp_desc = '0; mem_req_ready = 0;
    forever begin
      @(negedge clk);
      mem_rsp_valid = 0;
      mem_req_ready = 1;
      #1;
      if (mem_req_valid) begin
        automatic logic w = mem_req_write;
        automatic page_t pg = mem_req_page;
        automatic mq_desc_t dd = mem_req_desc;
        @(negedge clk);            // handshake on the edge in between
        mem_req_ready = 0;
        if (w) dram_store[pg] = dd;
        else begin
          repeat (2) @(negedge clk);
          mem_rsp_desc = dram_store.exists(pg) ? dram_store[pg] : '0;
          mem_rsp_valid = 1;
        end
      end
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  page_t pages [24];
  initial begin
    upd_valid = 0; upd_page = '0; os_freeze = 0; os_rd_idx = '0;
    for (int i = 0; i < 16; i++) pages[i] = 22'(i * 37 + 5);
    for (int i = 16; i < 24; i++) pages[i] = pages[i - 16] ^ 22'h001001;   // same slot
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (upd_ready);
    @(negedge clk);
    for (int u = 0; u < 3000; u++) begin
      page_t p;
      // skewed popularity: a few hot pages, the rest cold
      p = ($urandom_range(0, 3) != 0) ? pages[$urandom_range(0, 3)] : pages[$urandom_range(4, 23)];
      upd_valid = 1; upd_page = p;
      #1;
      while (!upd_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      upd_valid = 0;
      model_update(p);
      while (busy) @(negedge clk);
      compare_lists();
    end
    check(n_hits == e_hits && n_misses == e_miss, "hit/miss counters");
    check(n_promotions == e_prom && n_demotions == e_dem,
          $sformatf("promotions %0d/%0d demotions %0d/%0d", n_promotions, e_prom, n_demotions, e_dem));
    check(e_dem > 0 && e_prom > 0 && e_miss > 24, "mechanisms exercised");
    // OS read port and freeze
    os_rd_idx = dut.head[0][11:0]; @(negedge clk);
    check(os_rd_desc.page == lists[0][0], "OS read of queue 0 head");
    os_freeze = 1; upd_valid = 1; upd_page = pages[0];
    #1; check(!upd_ready, "freeze holds updates");
    @(negedge clk); upd_valid = 0; os_freeze = 0;
    $display("hits=%0d misses=%0d promotions=%0d demotions=%0d", n_hits, n_misses, n_promotions, n_demotions);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
