// remap_table: the Remapping Table, a translation layer between the physical page
// numbers the operating system assigns (and that arrive from the last-level cache)
// and the DRAM page frames that actually hold the pages after migrations.
//
// Lookup: a request's page number is looked up in one cycle; on a hit the stored
// frame is used, otherwise the page number itself. Insert: when a migration
// segment finishes, the migration engine submits one (page, new frame) pair per
// migration; an existing mapping of the same page is overwritten. Commit: the OS
// periodically copies the translations into its page table and then clears the
// table (os_clear); the table raises irq_full when an insert finds no room, and
// holds that insert (ins_ready low) until the clear.
//
// How: ENTRIES = 4096 slots of {valid, page, frame} (22 + 22 bits plus valid, within
// the 56 bits per entry that 28 KB / 4K entries allows), direct-mapped by the 12-bit
// page hash. The valid bits are flip-flops so the clear takes one cycle.
//
// Timing: lk_page in cycle t gives lk_hit / lk_frame / lk_out_page in cycle t+1.
// os_rd_idx -> os_rd_* also has one cycle of latency.
//
// From the paper: 4K entries, 28 KB, 1-cycle lookup, inserts from the migration
// engine, OS read access, clear after commit, interrupt when the table fills up.
// This design's choices: direct-mapped placement (a collision counts as "full"),
// and holding the insert until the OS has cleared the table.
module remap_table
  import ramzzz_pkg::*;
#(
  parameter int unsigned ENTRIES = 4096
) (
  input  logic  clk,
  input  logic  rst_n,
  // lookup
  input  page_t lk_page,
  output logic  lk_hit,
  output page_t lk_frame,
  output page_t lk_out_page,
  // insert from the migration engine
  input  logic  ins_valid,
  output logic  ins_ready,
  input  page_t ins_page,
  input  page_t ins_frame,
  // OS side
  input  logic  os_clear,
  input  logic [$clog2(ENTRIES)-1:0] os_rd_idx,
  output logic  os_rd_valid,
  output page_t os_rd_page,
  output page_t os_rd_frame,
  output logic  irq_full,
  output logic [$clog2(ENTRIES+1)-1:0] occupancy
);
  localparam int unsigned IW = $clog2(ENTRIES);

  logic [ENTRIES-1:0] valid;
  page_t              key   [ENTRIES];
  page_t              frame [ENTRIES];

  logic [IW-1:0] lk_idx, ins_idx;
  logic          ins_room, ins_new, ins;
  page_t         lk_page_q;

  assign lk_idx   = IW'(page_hash12(lk_page));
  assign ins_idx  = IW'(page_hash12(ins_page));
  assign ins_room = !valid[ins_idx] || (key[ins_idx] == ins_page);
  assign ins_new  = !valid[ins_idx];
  assign ins_ready = ins_room && !os_clear;
  assign ins       = ins_valid && ins_ready;
  assign lk_out_page = lk_hit ? lk_frame : lk_page_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid     <= '0;
      irq_full  <= 1'b0;
      occupancy <= '0;
      lk_hit    <= 1'b0;
    end else begin
      lk_hit <= valid[lk_idx] && (key[lk_idx] == lk_page);
      if (os_clear) begin
        valid     <= '0;
        irq_full  <= 1'b0;
        occupancy <= '0;
      end else begin
        if (ins) begin
          valid[ins_idx] <= 1'b1;
          if (ins_new) occupancy <= occupancy + 1'b1;
        end
        if (ins_valid && !ins_room) irq_full <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    lk_frame  <= frame[lk_idx];
    lk_page_q <= lk_page;
    if (ins) begin
      key[ins_idx]   <= ins_page;
      frame[ins_idx] <= ins_frame;
    end
    os_rd_valid <= valid[os_rd_idx];
    os_rd_page  <= key[os_rd_idx];
    os_rd_frame <= frame[os_rd_idx];
  end
endmodule
