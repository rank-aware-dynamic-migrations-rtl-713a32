// tb_demotion_ctrl: self-checking test of demotion_ctrl with the DDR3 default
// resynchronisation times. It checks, cycle by cycle over long idle periods, that
// the rank is in state S_I(t) with I(t) = max{i : Delta_i < t} (ACT if none),
// including skipped (disabled) states; that a request in each low-power state S_i
// makes the rank ready exactly RESYNC_CYC[i] cycles after the cycle in which the
// request is seen; that activity keeps the rank in ACT; and that each idle period
// is reported with its length.
module tb_demotion_ctrl;
  import ramzzz_pkg::*;
  localparam int unsigned R [5] = '{16, 48, 64, 2043, 18003};
  logic clk = 0, rst_n = 0;
  logic cfg_we, access_req, busy, ready, resyncing, idle_end;
  logic [PSTATE_W-1:0] cfg_idx;
  time_t cfg_val, idle_len;
  pstate_t state;
  logic [31:0] n_resyncs;
  logic [31:0] state_cycles [6];
  int checks = 0, failures = 0;
  time_t d [5];
  time_t last_idle_len;
  int idle_events = 0;
  int exp_rs = 0;

  demotion_ctrl dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) if (idle_end) begin last_idle_len = idle_len; idle_events++; end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  task automatic configure(time_t v0, time_t v1, time_t v2, time_t v3, time_t v4);
    d = '{v0, v1, v2, v3, v4};
    for (int i = 0; i < 5; i++) begin
      cfg_we = 1; cfg_idx = PSTATE_W'(i + 1); cfg_val = d[i];
      @(negedge clk);
    end
    cfg_we = 0;
  endtask

  function automatic pstate_t I(longint t);
    pstate_t s = PS_ACT;
    for (int i = 0; i < 5; i++) if (longint'(d[i]) < t) s = PSTATE_W'(i + 1);
    return s;
  endfunction

  // one active cycle, then `n` idle cycles checking the state after each
  task automatic idle_run(int n);
    if (state != PS_ACT) begin
      exp_rs++;
      access_req = 1;
      do @(negedge clk); while (!ready);
      access_req = 0;
    end
    busy = 1; @(negedge clk); busy = 0;
    for (int t = 1; t <= n; t++) begin
      @(negedge clk);
      check(state == I(t), $sformatf("state after %0d idle cycles: got %0d want %0d", t, state, I(t)));
    end
  endtask

  // request in the current state, count cycles to ready
  task automatic wake(int want);
    int k = 0;
    if (state != PS_ACT) exp_rs++;
    access_req = 1;
    do begin @(negedge clk); k++; end while (!ready && k < 30000);
    access_req = 0;
    check(k == want, $sformatf("resync cycles: got %0d want %0d", k, want));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_we = 0; cfg_idx = '0; cfg_val = '0; access_req = 0; busy = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // unconfigured: never leaves ACT
    d = '{default: '1};
    idle_run(500);
    check(ready && state == PS_ACT, "unconfigured rank stays ACT");
    // full chain
    configure(10, 20, 40, 100, 300);
    idle_run(1000);
    check(state == 5, "reached SR_SLOW");
    wake(int'(R[4]) + 1);
    check(idle_events > 0 && last_idle_len == 1000, "idle period length reported");
    // a disabled state is skipped
    configure(10, 20, '1, 100, 300);
    idle_run(150);
    wake(int'(R[3]) + 1);
    // resynchronisation from every state
    for (int i = 0; i < 5; i++) begin
      configure(i == 0 ? 5 : '1, i == 1 ? 5 : '1, i == 2 ? 5 : '1, i == 3 ? 5 : '1, i == 4 ? 5 : '1);
      idle_run(10);
      check(state == PSTATE_W'(i + 1), "single enabled state reached");
      wake(int'(R[i]) + 1);
    end
    // timeout 0: first idle cycle demotes; activity holds ACT
    configure(0, '1, '1, '1, '1);
    check(state == 1, "Delta=0 demotes during configuration idle cycles");
    exp_rs++;
    access_req = 1; do @(negedge clk); while (!ready); access_req = 0;
    busy = 1; repeat (20) begin @(negedge clk); check(state == PS_ACT, "busy keeps ACT"); end
    busy = 0; @(negedge clk);
    check(state == 1, "Delta=0 demotes at once");
    check(n_resyncs == 32'(exp_rs), $sformatf("resync count %0d want %0d", n_resyncs, exp_rs));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
