// migration_engine: the Migration module. It holds the queue of page migrations the
// operating system scheduled for the current epoch and carries them out, segment by
// segment, in idle periods of the memory system.
//
// The OS groups pages into ranks, matches groups to ranks so that as few pages as
// possible move, and orders the moves along Eulerian cycles of the rank graph. It
// cuts each cycle into segments that are simple paths or cycles, so that in a
// segment every rank sends at most one page and receives at most one page. The
// moves of one segment run concurrently thanks to one extra row buffer per rank:
// phase A copies every outgoing page into the extra buffer of its destination rank
// (MIG_TO_BUF), phase B has every destination rank write its buffer into the frame
// the departing page left (MIG_COMMIT). Then the (page, new frame) pairs go to the
// Remapping Table, one per cycle. From the moment a segment is chosen until its
// last remapping is accepted, requests to the pages it moves are blocked (blk_hit);
// requests to all other pages proceed.
//
// How: entries are appended through os_wr_*; an entry with seg_end closes a segment,
// whose start and length go to a segment table. os_go starts the epoch's work.
// The engine scans the segment table for the longest segment not yet done (one
// table entry per cycle), copies its entries into registers, wakes its ranks, waits
// until sched_ok (no application request waiting) with the ranks awake and the
// OS commit flag (hold) clear, then runs phases A and B, each issuing one command
// per cycle under cmd_ready and waiting for as many cmd_done pulses, and finally
// the remapping. When no segment is left, the queue empties and busy falls.
//
// From the paper: the queue of scheduled migrations (10 KB), segments in
// consecutive queue positions, longest segments first, execution in idle periods,
// the extra row buffer and its two steps, blocking of the involved pages only,
// hand-over to the Remap module, no migration during an OS commit. This design's
// choices: 80-bit entries (1024 in 10 KB), the segment table size, the command
// encoding, segments of at most NUM_RANKS moves, rank = frame / RANK_PAGES.
module migration_engine
  import ramzzz_pkg::*;
#(
  parameter int unsigned QDEPTH    = 1024,
  parameter int unsigned MAX_SEGS  = 256,
  parameter int unsigned NUM_RANKS = 8,
  parameter int unsigned RANK_LSB  = 16     // 65536 frames (256 MB) per rank
) (
  input  logic       clk,
  input  logic       rst_n,
  // OS: load and start
  input  logic       os_wr_valid,
  input  mig_entry_t os_wr_entry,
  output logic       os_wr_ready,
  input  logic       os_go,
  input  logic       hold,            // OS commit in progress
  // scheduling
  input  logic       sched_ok,        // an idle period: no application request waiting
  output logic [NUM_RANKS-1:0] rank_wake,
  output logic [NUM_RANKS-1:0] rank_active,
  input  logic [NUM_RANKS-1:0] rank_ready,
  // commands to the ranks
  output logic       cmd_valid,
  input  logic       cmd_ready,
  output mig_cmd_t   cmd,
  input  logic       cmd_done,
  // to the Remapping Table
  output logic       remap_valid,
  input  logic       remap_ready,
  output page_t      remap_page,
  output page_t      remap_frame,
  // blocking check for the dispatch stage
  input  page_t      blk_page,
  output logic       blk_hit,
  // status
  output logic       busy,
  output logic [31:0] n_segments,
  output logic [31:0] n_migrations
);
  localparam int unsigned QW  = $clog2(QDEPTH);
  localparam int unsigned SW  = $clog2(MAX_SEGS);
  localparam int unsigned RW  = (NUM_RANKS > 1) ? $clog2(NUM_RANKS) : 1;
  localparam int unsigned MS  = NUM_RANKS;          // max moves per segment
  localparam int unsigned LW  = $clog2(MS + 1);
  localparam int unsigned SIW = (MS > 1) ? $clog2(MS) : 1;

  typedef enum logic [3:0] {
    M_IDLE, M_PICK, M_LOAD, M_WAIT, M_A, M_A_WAIT, M_B, M_B_WAIT, M_REMAP
  } mstate_e;

  mig_entry_t          q [QDEPTH];
  logic [QW:0]         q_cnt;           // entries written
  logic [QW-1:0]       seg_start [MAX_SEGS];
  logic [LW-1:0]       seg_len   [MAX_SEGS];
  logic [MAX_SEGS-1:0] seg_done;
  logic [SW:0]         seg_cnt;
  logic [QW-1:0]       cur_start;       // start of the segment being written
  logic [LW-1:0]       cur_len;

  mstate_e             st;
  logic [SW:0]         scan;
  logic [SW-1:0]       best;
  logic [LW-1:0]       best_len;
  logic [LW-1:0]       j, ndone;
  mig_entry_t          seg [MS];
  logic [NUM_RANKS-1:0] mask;
  logic                blocking;

  function automatic logic [RW-1:0] rank_of(page_t f);
    return RW'(f >> RANK_LSB);
  endfunction

  // ---- OS writes -------------------------------------------------------------
  assign os_wr_ready = (st == M_IDLE) && (q_cnt < QDEPTH[QW:0]) && (seg_cnt < MAX_SEGS[SW:0]);

  // ---- outputs -----------------------------------------------------------------
  assign busy        = (st != M_IDLE);
  assign rank_wake   = (st == M_WAIT || st == M_A || st == M_A_WAIT ||
                        st == M_B || st == M_B_WAIT) ? mask : '0;
  assign rank_active = (st == M_A || st == M_A_WAIT || st == M_B || st == M_B_WAIT) ? mask : '0;
  assign cmd_valid   = (st == M_A || st == M_B);
  assign cmd.op        = (st == M_B) ? MIG_COMMIT : MIG_TO_BUF;
  assign cmd.src_frame = seg[SIW'(j)].src_frame;
  assign cmd.dst_frame = seg[SIW'(j)].dst_frame;
  assign remap_valid = (st == M_REMAP);
  assign remap_page  = seg[SIW'(j)].os_page;
  assign remap_frame = seg[SIW'(j)].dst_frame;

  always_comb begin
    blk_hit = 1'b0;
    for (int i = 0; i < int'(MS); i++)
      if (blocking && LW'(i) < best_len && seg[i].os_page == blk_page) blk_hit = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st           <= M_IDLE;
      q_cnt        <= '0;
      seg_cnt      <= '0;
      seg_done     <= '0;
      cur_start    <= '0;
      cur_len      <= '0;
      scan         <= '0;
      best         <= '0;
      best_len     <= '0;
      j            <= '0;
      ndone        <= '0;
      mask         <= '0;
      blocking     <= 1'b0;
      n_segments   <= '0;
      n_migrations <= '0;
    end else begin
      unique case (st)
        M_IDLE: begin
          if (os_wr_valid && os_wr_ready) begin
            q[q_cnt[QW-1:0]] <= os_wr_entry;
            q_cnt <= q_cnt + 1'b1;
            if (os_wr_entry.seg_end || cur_len == LW'(MS - 1)) begin
              seg_start[seg_cnt[SW-1:0]] <= cur_start;
              seg_len[seg_cnt[SW-1:0]]   <= cur_len + 1'b1;
              seg_cnt   <= seg_cnt + 1'b1;
              cur_start <= QW'(q_cnt + 1'b1);
              cur_len   <= '0;
            end else begin
              cur_len <= cur_len + 1'b1;
            end
          end else if (os_go && seg_cnt != '0) begin
            scan     <= '0;
            best_len <= '0;
            st       <= M_PICK;
          end
        end
        // find the longest segment not yet done
        M_PICK: begin
          if (scan == seg_cnt) begin
            if (best_len == '0) begin
              q_cnt     <= '0;
              seg_cnt   <= '0;
              seg_done  <= '0;
              cur_start <= '0;
              cur_len   <= '0;
              st        <= M_IDLE;
            end else begin
              j    <= '0;
              mask <= '0;
              st   <= M_LOAD;
            end
          end else begin
            if (!seg_done[scan[SW-1:0]] && seg_len[scan[SW-1:0]] > best_len) begin
              best     <= scan[SW-1:0];
              best_len <= seg_len[scan[SW-1:0]];
            end
            scan <= scan + 1'b1;
          end
        end
        M_LOAD: begin
          seg[SIW'(j)] <= q[QW'(seg_start[best] + QW'(j))];
          mask[rank_of(q[QW'(seg_start[best] + QW'(j))].src_frame)] <= 1'b1;
          mask[rank_of(q[QW'(seg_start[best] + QW'(j))].dst_frame)] <= 1'b1;
          if (j == best_len - 1'b1) begin
            blocking <= 1'b1;
            st       <= M_WAIT;
          end
          j <= j + 1'b1;
        end
        M_WAIT: if (!hold && sched_ok && ((rank_ready & mask) == mask)) begin
          j     <= '0;
          ndone <= '0;
          st    <= M_A;
        end
        M_A, M_B: begin
          if (cmd_done) ndone <= ndone + 1'b1;
          if (cmd_ready) begin
            if (j == best_len - 1'b1) st <= (st == M_A) ? M_A_WAIT : M_B_WAIT;
            else j <= j + 1'b1;
          end
        end
        M_A_WAIT, M_B_WAIT: begin
          if ((ndone + LW'(cmd_done)) == best_len) begin
            j     <= '0;
            ndone <= '0;
            st    <= (st == M_A_WAIT) ? M_B : M_REMAP;
          end else if (cmd_done) begin
            ndone <= ndone + 1'b1;
          end
        end
        M_REMAP: if (remap_ready) begin
          if (j == best_len - 1'b1) begin
            seg_done[best] <= 1'b1;
            blocking       <= 1'b0;
            n_segments     <= n_segments + 1;
            n_migrations   <= n_migrations + 32'(best_len);
            scan           <= '0;
            best_len       <= '0;
            st             <= M_PICK;
          end else begin
            j <= j + 1'b1;
          end
        end
        default: st <= M_IDLE;
      endcase
    end
  end

  // a segment never asks a rank to send or receive two pages
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
    end else if (st == M_LOAD && j != '0)
      for (int i = 0; i < int'(MS); i++)
        if (LW'(i) < j)
          a_one_per_rank: assert (rank_of(seg[i].dst_frame) !=
                                  rank_of(q[QW'(seg_start[best] + QW'(j))].dst_frame));
  end
endmodule
