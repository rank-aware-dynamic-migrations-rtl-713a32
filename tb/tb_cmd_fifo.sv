// tb_cmd_fifo: self-checking test of cmd_fifo. Random pushes and pops against a
// queue model check first-come first-served order, the full/empty flags, that a
// push and a pop can share a cycle when full, and the one-cycle latency from push
// to head.
module tb_cmd_fifo;
  import ramzzz_pkg::*;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  mem_req_t in_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  mem_req_t model[$];

  cmd_fifo #(.T(mem_req_t), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!out_valid && count == 0, "empty after reset");
    // latency: push one, visible next cycle
    in_valid = 1; in_data = '{write: 1'b1, app: 1'b1, page: 22'h12345, line: 6'd7};
    @(negedge clk);
    in_valid = 0;
    check(out_valid && out_data.page == 22'h12345 && out_data.line == 7, "head one cycle after push");
    out_ready = 1; @(negedge clk); out_ready = 0;
    check(!out_valid, "empty after pop");
    // fill completely
    for (int i = 0; i < DEPTH; i++) begin
      in_valid = 1; in_data = '0; in_data.page = 22'(i + 100);
      check(in_ready, "ready while not full");
      model.push_back(in_data);
      @(negedge clk);
    end
    in_valid = 0;
    check(count == DEPTH && !in_ready, "full flag");
    // push and pop together while full
    in_valid = 1; in_data = '0; in_data.page = 22'h3ffff; out_ready = 1;
    #1;
    check(in_ready, "ready when full and popping");
    check(out_data == model[0], "head while full");
    void'(model.pop_front()); model.push_back(in_data);
    @(negedge clk);
    in_valid = 0; out_ready = 0;
    check(count == DEPTH, "count unchanged by push+pop");
    // random traffic
    for (int c = 0; c < 20000; c++) begin
      in_valid  = ($urandom_range(0, 99) < 55);
      out_ready = ($urandom_range(0, 99) < 50);
      in_data   = mem_req_t'($urandom);
      #1;
      if (out_valid) begin
        check(model.size() > 0 && out_data == model[0], "FCFS order");
      end else begin
        check(model.size() == 0, "out_valid matches model");
      end
      check(in_ready == (model.size() < DEPTH || out_ready), "in_ready rule");
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
      @(negedge clk);
      check(count == model.size(), "count");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
