// tb_idle_histogram: self-checking test of idle_histogram with SQRT_T = 100 (a
// slot of 10^4 cycles). Random idle-period lengths of 1..300 cycles are reported
// during each slot; after slot_start the finished slot is read back through the OS
// port and compared with a model (counters for lengths <= 100, ordered list of
// longer lengths), including the exact boundary length 100 and 101. A second read
// checks clear-on-read, and recording continues into the other bank meanwhile.
module tb_idle_histogram;
  import ramzzz_pkg::*;
  localparam int S = 100;
  logic clk = 0, rst_n = 0;
  logic slot_start, idle_end, os_rd_en, os_rd_sel, init_done;
  time_t idle_len;
  logic [$clog2(S+1)-1:0] os_rd_idx, os_long_cnt;
  logic [31:0] os_rd_data, overflow;
  int checks = 0, failures = 0;
  int m_short [2][S+1];
  int m_long [2][$];
  int cur = 0;

  idle_histogram #(.SQRT_T(S)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  task automatic event_len(int len);
    idle_end = 1; idle_len = time_t'(len);
    @(negedge clk);
    idle_end = 0;
    if (len <= S) m_short[cur][len]++; else m_long[cur].push_back(len);
  endtask

  task automatic read(bit sel, int idx, output int val);
    os_rd_en = 1; os_rd_sel = sel; os_rd_idx = ($bits(os_rd_idx))'(idx);
    @(negedge clk);
    os_rd_en = 0;
    val = int'(os_rd_data);
  endtask

  // read back the finished bank `b`, interleaving new events into the active bank
  task automatic verify_bank(int b);
    int v;
    check(int'(os_long_cnt) == m_long[b].size(), "long count");
    for (int i = 0; i <= S; i++) begin
      read(1'b0, i, v);
      check(v == m_short[b][i], $sformatf("short[%0d] = %0d want %0d", i, v, m_short[b][i]));
      if (i % 7 == 0) event_len($urandom_range(1, 300));
    end
    foreach (m_long[b][i]) begin
      read(1'b1, i, v);
      check(v == m_long[b][i], "long length");
    end
    // clear on read
    for (int i = 0; i <= S; i += 10) begin
      read(1'b0, i, v);
      check(v == 0, "short counter cleared by read");
    end
    foreach (m_short[b][i]) m_short[b][i] = 0;
    m_long[b] = {};
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    slot_start = 0; idle_end = 0; idle_len = '0; os_rd_en = 0; os_rd_sel = 0; os_rd_idx = '0;
    foreach (m_short[b, i]) m_short[b][i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (init_done);
    @(negedge clk);
    for (int slot = 0; slot < 4; slot++) begin
      event_len(S); event_len(S + 1); event_len(1);
      for (int e = 0; e < 60; e++) begin
        event_len($urandom_range(1, 300));
        @(negedge clk);
      end
      slot_start = 1; @(negedge clk); slot_start = 0;
      cur = 1 - cur;
      verify_bank(1 - cur);
    end
    check(overflow == 0, "no overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
