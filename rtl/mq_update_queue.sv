// mq_update_queue: the circular buffer of pending updates to the MQ structure.
//
// The MQ logic snoops the request FIFO and creates one update (the page number)
// per new request. Updates are applied later, off the critical path of memory
// accesses, by mq_table. A new update precludes any update to the same page that
// is still queued: the older slot is marked dead and is skipped when it reaches
// the head, so each page has at most one live update in the buffer.
//
// How: slots hold the page number and a live bit. A pending index of HASH_ENTRIES
// entries, addressed by the 12-bit page hash, remembers the slot of the newest
// queued update of a page; on a push the slot it names is killed if it still holds
// the same page. On a pop the index entry is released if it points to the popped
// slot. Dead slots at the head are dropped one per cycle without being offered.
//
// Interface: push side is fire-and-forget (push_valid); when the buffer is full the
// update is dropped and counted in `dropped` (the MQ is a statistic, so the request
// itself is never held back). Pop side is valid/ready; pop_page is combinational.
//
// From the paper: the circular buffer, 10 KB in size, and the "new update
// precludes a queued update to the same entry" rule. This design's choices: 32-bit
// slots (so 10 KB = 2560 slots), dropping updates when full, the pending index.
module mq_update_queue
  import ramzzz_pkg::*;
#(
  parameter int unsigned DEPTH        = 2560,   // 10 KB of 32-bit slots
  parameter int unsigned HASH_ENTRIES = 4096
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  push_valid,
  input  page_t push_page,
  output logic  pop_valid,
  input  logic  pop_ready,
  output page_t pop_page,
  output logic [31:0] dropped,     // updates lost because the buffer was full
  output logic [31:0] precluded,   // queued updates superseded by a newer one
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned HW = $clog2(HASH_ENTRIES);

  page_t          q_page [DEPTH];
  logic [DEPTH-1:0] q_live;
  logic           pend_v [HASH_ENTRIES];
  logic [AW-1:0]  pend_slot [HASH_ENTRIES];
  logic [AW-1:0]  wptr, rptr;

  logic           full, push, pop, skip, head_live;
  logic [HW-1:0]  h_push, h_pop;
  logic [AW-1:0]  old_slot;
  logic           kill_old;
  logic           init_busy;
  logic [HW-1:0]  init_idx;

  function automatic logic [AW-1:0] incr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  assign full      = (count == DEPTH[$bits(count)-1:0]);
  assign head_live = q_live[rptr];
  assign pop_valid = (count != '0) && head_live;
  assign pop_page  = q_page[rptr];
  assign pop       = pop_valid && pop_ready;
  assign skip      = (count != '0) && !head_live;
  assign push      = push_valid && !full;
  assign h_push    = HW'(page_hash12(push_page));
  assign h_pop     = HW'(page_hash12(q_page[rptr]));
  assign old_slot  = pend_slot[h_push];
  assign kill_old  = push && !init_busy && pend_v[h_push] && (q_page[old_slot] == push_page) &&
                     !((pop || skip) && old_slot == rptr);   // leaving this cycle anyway

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr      <= '0;
      rptr      <= '0;
      count     <= '0;
      q_live    <= '0;
      dropped   <= '0;
      precluded <= '0;
    end else begin
      if (push_valid && full) dropped <= dropped + 1;
      if (pop || skip) rptr <= incr(rptr);
      count <= count + $bits(count)'(push) - $bits(count)'(pop || skip);
      if (kill_old) begin
        q_live[old_slot] <= 1'b0;
        precluded        <= precluded + 1;
      end
      if (push) begin
        wptr         <= incr(wptr);
        q_live[wptr] <= 1'b1;
      end
    end
  end

  // slot storage and pending index (no reset needed for the data; pend_v is
  // cleared by a sweep of HASH_ENTRIES cycles after reset, during which updates are
  // queued but not coalesced)

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_busy <= 1'b1;
      init_idx  <= '0;
    end else if (init_busy) begin
      init_idx  <= init_idx + 1'b1;
      if (init_idx == HW'(HASH_ENTRIES - 1)) init_busy <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (push) q_page[wptr] <= push_page;
    if (init_busy) begin
      pend_v[init_idx] <= 1'b0;
    end else begin
      // release first, then a push of the same hash overrides
      if ((pop || skip) && pend_v[h_pop] && pend_slot[h_pop] == rptr)
        pend_v[h_pop] <= 1'b0;
      if (push) begin
        pend_v[h_push]    <= 1'b1;
        pend_slot[h_push] <= wptr;
      end
    end
  end

  // at most one live slot per page: a pending entry never points to a dead slot
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
    end else if (!init_busy && push && pend_v[h_push])
      a_pend_live: assert (q_live[old_slot] || q_page[old_slot] != push_page);
  end
endmodule
