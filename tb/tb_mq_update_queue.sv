// tb_mq_update_queue: self-checking test of mq_update_queue. A queue model in which
// a new update of a page removes that page's queued update predicts the order of
// the popped pages; directed parts check dropping when full, the counters, and
// that an update can be popped the cycle after it was pushed.
module tb_mq_update_queue;
  import ramzzz_pkg::*;
  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0;
  logic push_valid, pop_valid, pop_ready;
  page_t push_page, pop_page;
  logic [31:0] dropped, precluded;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  page_t model[$];
  int exp_precluded = 0;

  mq_update_queue #(.DEPTH(DEPTH), .HASH_ENTRIES(4096)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push_valid = 0; pop_ready = 0; push_page = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (4100) @(negedge clk);          // pending-index sweep
    // latency: push then pop next cycle
    push_valid = 1; push_page = 22'd5; @(negedge clk); push_valid = 0;
    check(pop_valid && pop_page == 22'd5, "pop one cycle after push");
    pop_ready = 1; @(negedge clk); pop_ready = 0;
    // directed preclusion: 1,2,1 -> pops 2,1
    push_valid = 1;
    push_page = 22'd1; @(negedge clk);
    push_page = 22'd2; @(negedge clk);
    push_page = 22'd1; @(negedge clk);
    push_valid = 0;
    check(precluded == 1, "precluded counter");
    pop_ready = 1;
    while (!pop_valid) @(negedge clk);
    check(pop_page == 22'd2, "first pop skips precluded update");
    @(negedge clk);
    while (!pop_valid) @(negedge clk);
    check(pop_page == 22'd1, "second pop is the newer update");
    @(negedge clk);
    repeat (3) @(negedge clk);
    check(!pop_valid && count == 0, "empty after directed test");
    pop_ready = 0;
    // drop when full
    for (int i = 0; i < DEPTH + 3; i++) begin
      push_valid = 1; push_page = 22'(100 + i); @(negedge clk);
    end
    push_valid = 0;
    check(dropped == 3, "three updates dropped when full");
    check(count == DEPTH, "full count");
    pop_ready = 1;
    for (int i = 0; i < DEPTH; i++) begin
      check(pop_valid && pop_page == 22'(100 + i), "order after fill");
      @(negedge clk);
    end
    check(!pop_valid, "drained");
    // random traffic over a few pages, pops fast enough to avoid drops
    exp_precluded = precluded;
    for (int c = 0; c < 30000; c++) begin
      push_valid = ($urandom_range(0, 99) < 30);
      push_page  = 22'($urandom_range(0, 11));
      pop_ready  = ($urandom_range(0, 99) < 70);
      #1;
      if (pop_valid && pop_ready) begin
        check(model.size() > 0 && pop_page == model[0], "random: order");
        if (model.size() > 0) void'(model.pop_front());
      end
      if (push_valid) begin
        automatic int idx[$];
        idx = model.find_first_index(x) with (x == push_page);
        if (idx.size() > 0) begin model.delete(idx[0]); exp_precluded++; end
        model.push_back(push_page);
      end
      @(negedge clk);
    end
    check(dropped == 3, "no drop in random phase");
    check(precluded == exp_precluded, "random: precluded count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
