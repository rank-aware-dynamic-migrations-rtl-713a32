// slot_epoch_timer: the time base of the power manager. Time is cut into slots of
// SLOT_CYCLES cycles (the demotion configuration and the idle-period prediction are
// renewed at the beginning of each slot) and epochs of SLOTS_PER_EPOCH slots (page
// grouping and migration are planned at the beginning of each epoch).
//
// How: a cycle counter wraps every SLOT_CYCLES cycles and a slot counter every
// SLOTS_PER_EPOCH slots. slot_start is a one-cycle pulse in the first cycle of every
// slot after the first, epoch_start a pulse in the first cycle of every epoch after
// the first (it coincides with a slot_start). The first slot and epoch begin with
// the cycle after reset. slot_idx tells the position of the slot in its epoch.
//
// From the paper: slot = 1e8 cycles, epoch = ten slots, and an epoch consisting of
// whole slots. This design's choice: the pulses and counters themselves.
module slot_epoch_timer
  import ramzzz_pkg::*;
#(
  parameter int unsigned SLOT_CYCLES     = 100_000_000,
  parameter int unsigned SLOTS_PER_EPOCH = 10
) (
  input  logic  clk,
  input  logic  rst_n,
  output logic  slot_start,
  output logic  epoch_start,
  output logic [$clog2(SLOTS_PER_EPOCH+1)-1:0] slot_idx,
  output logic [31:0] n_slots,
  output logic [31:0] n_epochs
);
  localparam int unsigned CW = $clog2(SLOT_CYCLES + 1);
  logic [CW-1:0] cyc;
  logic          wrap_slot, wrap_epoch;

  assign wrap_slot  = (cyc == CW'(SLOT_CYCLES - 1));
  assign wrap_epoch = wrap_slot && (slot_idx == $bits(slot_idx)'(SLOTS_PER_EPOCH - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc         <= '0;
      slot_idx    <= '0;
      slot_start  <= 1'b0;
      epoch_start <= 1'b0;
      n_slots     <= '0;
      n_epochs    <= '0;
    end else begin
      slot_start  <= wrap_slot;
      epoch_start <= wrap_epoch;
      if (wrap_slot) begin
        cyc      <= '0;
        n_slots  <= n_slots + 1;
        slot_idx <= wrap_epoch ? '0 : slot_idx + 1'b1;
        if (wrap_epoch) n_epochs <= n_epochs + 1;
      end else begin
        cyc <= cyc + 1'b1;
      end
    end
  end
endmodule
