// tb_slot_epoch_timer: self-checking test of slot_epoch_timer with short slots
// (SLOT_CYCLES = 100, 4 slots per epoch). It checks that slot_start follows every
// 100th clock edge after reset and epoch_start every 400th, the exact cycle of every
// slot_start and epoch_start pulse against a cycle counter, the slot index, and
// the slot and epoch counts.
module tb_slot_epoch_timer;
  localparam int SLOT = 100, SPE = 4;
  logic clk = 0, rst_n = 0;
  logic slot_start, epoch_start;
  logic [$clog2(SPE+1)-1:0] slot_idx;
  logic [31:0] n_slots, n_epochs;
  int checks = 0, failures = 0;
  int cyc = 0;

  slot_epoch_timer #(.SLOT_CYCLES(SLOT), .SLOTS_PER_EPOCH(SPE)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s cyc=%0d", what, cyc); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // cyc counts cycles since reset release; slot k starts at cycle k*SLOT
    for (cyc = 0; cyc < SLOT * SPE * 5 + 6; cyc++) begin
      @(negedge clk);
      // after clock edge e = cyc + 1 since reset release
      check(slot_start == ((cyc + 1) % SLOT == 0), "slot_start position");
      check(epoch_start == ((cyc + 1) % (SLOT * SPE) == 0), "epoch_start position");
      check(int'(slot_idx) == ((cyc + 1) / SLOT) % SPE, "slot index");
    end
    check(n_slots == 20 && n_epochs == 5, "slot and epoch counts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
