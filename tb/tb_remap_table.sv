// tb_remap_table: self-checking test of remap_table. A model keyed by the page
// hash predicts every lookup (hit -> stored frame, miss -> the page itself) one
// cycle after it is presented; directed parts check overwrite of a page's mapping,
// the full interrupt on a collision with the insert held, the OS read port and the
// one-cycle clear.
module tb_remap_table;
  import ramzzz_pkg::*;
  logic clk = 0, rst_n = 0;
  page_t lk_page, lk_frame, lk_out_page, ins_page, ins_frame, os_rd_page, os_rd_frame;
  logic lk_hit, ins_valid, ins_ready, os_clear, os_rd_valid, irq_full;
  logic [11:0] os_rd_idx;
  logic [12:0] occupancy;
  int checks = 0, failures = 0;
  page_t m_key[int], m_frame[int];

  remap_table #(.ENTRIES(4096)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  function automatic page_t expect_lk(page_t p);
    int h = int'(page_hash12(p));
    if (m_key.exists(h) && m_key[h] == p) return m_frame[h];
    return p;
  endfunction

  task automatic insert(page_t p, page_t f);
    ins_valid = 1; ins_page = p; ins_frame = f;
    #1;
    while (!ins_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    ins_valid = 0;
    m_key[int'(page_hash12(p))] = p; m_frame[int'(page_hash12(p))] = f;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    lk_page = '0; ins_valid = 0; ins_page = '0; ins_frame = '0; os_clear = 0; os_rd_idx = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    lk_page = 22'h00abc; @(negedge clk);
    check(!lk_hit && lk_out_page == 22'h00abc, "miss returns the page itself after 1 cycle");
    insert(22'h00abc, 22'h30001);
    lk_page = 22'h00abc; @(negedge clk);
    check(lk_hit && lk_out_page == 22'h30001, "hit returns frame after 1 cycle");
    check(occupancy == 1, "occupancy 1");
    insert(22'h00abc, 22'h10002);
    @(negedge clk);
    check(lk_hit && lk_out_page == 22'h10002 && occupancy == 1, "overwrite of the same page");
    // collision: same hash, different page -> full interrupt, insert held
    ins_valid = 1; ins_page = 22'h00abc ^ 22'h01000 ^ 22'h00001; ins_frame = 22'h1;
    #1;
    check(page_hash12(ins_page) == page_hash12(22'h00abc), "tb: colliding page");
    check(!ins_ready, "colliding insert held");
    @(negedge clk);
    check(irq_full, "irq_full raised");
    // OS reads the entry, then clears
    os_rd_idx = page_hash12(22'h00abc); @(negedge clk);
    check(os_rd_valid && os_rd_page == 22'h00abc && os_rd_frame == 22'h10002, "OS read");
    os_clear = 1; @(negedge clk); os_clear = 0;
    m_key.delete(); m_frame.delete();
    check(!irq_full && occupancy == 0, "clear");
    #1; check(ins_ready, "held insert proceeds after clear");
    @(negedge clk); ins_valid = 0;
    m_key[int'(page_hash12(ins_page))] = ins_page; m_frame[int'(page_hash12(ins_page))] = 22'h1;
    // random inserts and lookups
    for (int c = 0; c < 20000; c++) begin
      page_t p;
      p = 22'($urandom_range(0, 1 << 14));
      if ($urandom_range(0, 3) == 0 && m_key.size() < 3000) begin
        automatic int h = int'(page_hash12(p));
        if (!m_key.exists(h) || m_key[h] == p) insert(p, 22'($urandom));
      end
      lk_page = 22'($urandom_range(0, 1 << 14));
      if ($urandom_range(0, 1)) lk_page = m_key.size() > 0 ? p : lk_page;
      @(negedge clk);
      check(lk_out_page == expect_lk(lk_page), "random lookup");
    end
    check(int'(occupancy) == m_key.size(), "occupancy matches model");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
