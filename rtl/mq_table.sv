// mq_table: the on-chip cache of the MQ (multi-queue) structure that ranks pages by
// access frequency and recency.
//
// MQ keeps QUEUES = 16 LRU queues. A page's descriptor holds its page number, a
// saturating reference counter, its queue number and the logical time of its last
// access. On an access the counter is incremented, the descriptor moves to the head
// (most recent end) of its queue, and it is promoted from queue i to queue i+1 when
// the counter reaches 2^(i+1). After every access the tail (least recent) descriptor
// of each queue k >= 1 is checked: if it has not been accessed for more than
// LIFETIME logical time units it is demoted to the head of queue k-1 and its time
// is refreshed. The operating system reads the queues from head to tail through the
// os_rd port (heads and tails are outputs) to group pages into ranks.
//
// How it works: descriptors live in a table of ENTRIES = 4096 slots addressed by a
// hash of the page number; the queues are doubly linked lists threaded through the
// table (prev/next pointers, NIL = all ones), with head and tail registers per
// queue. One update is processed at a time by a small state machine that does one
// table write per cycle: look up, unlink, (on a miss: write the victim descriptor
// back to DRAM and fetch the page's descriptor from DRAM), update counter and
// queue, link at head, then the expiration scan of queues 1..15. A hit takes
// 5 + 15 cycles plus 4 per demotion; a miss adds the DRAM round trip. A descriptor
// fetched from DRAM with its valid flag clear is a first access: queue 0,
// counter 1. Logical time advances by one per processed update.
//
// Interface: upd_valid/upd_ready take page numbers from mq_update_queue; os_freeze
// holds further updates so the OS sees a stable structure; mem_req_* / mem_rsp_*
// are descriptor read/write requests to DRAM (valid/ready, response valid only);
// os_rd_idx -> os_rd_desc has one cycle of latency.
//
// From the paper: 16 queues, promotion at 2^(i+1), expiration-based demotion, the
// 124-bit descriptor, 4K-entry hashed cache of 64 KB, DRAM requests on misses. This
// design's choices: LIFETIME, direct-mapped placement with write-back of the
// victim, lists threaded only through the cached descriptors (an evicted
// descriptor leaves its queue and rejoins it at the head when fetched again),
// logical time counted in updates.
module mq_table
  import ramzzz_pkg::*;
#(
  parameter int unsigned ENTRIES  = 4096,
  parameter int unsigned QUEUES   = MQ_QUEUES,
  parameter int unsigned LIFETIME = 65536
) (
  input  logic     clk,
  input  logic     rst_n,
  // updates
  input  logic     upd_valid,
  output logic     upd_ready,
  input  page_t    upd_page,
  input  logic     os_freeze,
  // descriptor traffic to DRAM
  output logic     mem_req_valid,
  input  logic     mem_req_ready,
  output logic     mem_req_write,
  output page_t    mem_req_page,
  output mq_desc_t mem_req_desc,
  input  logic     mem_rsp_valid,
  input  mq_desc_t mem_rsp_desc,
  // OS view
  input  logic [$clog2(ENTRIES)-1:0] os_rd_idx,
  output mq_desc_t os_rd_desc,
  output logic [PTR_W-1:0] os_head [QUEUES],
  output logic [PTR_W-1:0] os_tail [QUEUES],
  output logic     busy,
  // statistics
  output logic [31:0] n_hits,
  output logic [31:0] n_misses,
  output logic [31:0] n_promotions,
  output logic [31:0] n_demotions
);
  localparam int unsigned IW = $clog2(ENTRIES);
  localparam int unsigned QW = $clog2(QUEUES);

  typedef enum logic [3:0] {
    S_INIT, S_IDLE, S_LOOK, S_UNL1, S_UNL2, S_WB, S_FETCH, S_WAIT,
    S_UPDATE, S_LINK1, S_LINK2, S_EXP, S_DEM
  } state_e;
  typedef enum logic [1:0] { R_UPDATE, R_WB, R_DEM } ret_e;

  mq_desc_t          tab [ENTRIES];
  logic [PTR_W-1:0]  head [QUEUES];
  logic [PTR_W-1:0]  tail [QUEUES];

  state_e            st;
  ret_e              ret;
  logic              after_dem;    // LINK2 returns to the expiration scan
  mq_desc_t          cur;
  logic [IW-1:0]     idx;
  page_t             pg;
  time_t             now;
  logic [QW-1:0]     k;
  logic [IW-1:0]     init_idx;

  function automatic logic [PTR_W-1:0] ptr(logic [IW-1:0] i);
    return PTR_W'(i);
  endfunction
  function automatic logic [IW-1:0] ix(logic [PTR_W-1:0] p);
    return p[IW-1:0];
  endfunction

  mq_desc_t      look_e, tail_e;
  logic [PTR_W-1:0] tail_k;
  logic [REF_W-1:0] ref_inc;
  assign look_e  = tab[idx];
  assign tail_k  = tail[k];
  assign tail_e  = tab[ix(tail_k)];
  assign ref_inc = (cur.refcnt == '1) ? cur.refcnt : cur.refcnt + 1'b1;

  assign upd_ready     = (st == S_IDLE) && !os_freeze;
  assign busy          = (st != S_IDLE);
  assign mem_req_valid = (st == S_WB) || (st == S_FETCH);
  assign mem_req_write = (st == S_WB);
  assign mem_req_page  = (st == S_WB) ? cur.page : pg;
  assign mem_req_desc  = cur;

  always_comb begin
    for (int q = 0; q < int'(QUEUES); q++) begin
      os_head[q] = head[q];
      os_tail[q] = tail[q];
    end
  end

  always_ff @(posedge clk) os_rd_desc <= tab[os_rd_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st           <= S_INIT;
      ret          <= R_UPDATE;
      after_dem    <= 1'b0;
      cur          <= '0;
      idx          <= '0;
      pg           <= '0;
      now          <= '0;
      k            <= '0;
      init_idx     <= '0;
      n_hits       <= '0;
      n_misses     <= '0;
      n_promotions <= '0;
      n_demotions  <= '0;
      for (int q = 0; q < int'(QUEUES); q++) begin
        head[q] <= PTR_NIL;
        tail[q] <= PTR_NIL;
      end
    end else begin
      unique case (st)
        S_INIT: begin
          tab[init_idx].flags <= '0;
          init_idx <= init_idx + 1'b1;
          if (init_idx == IW'(ENTRIES - 1)) st <= S_IDLE;
        end
        S_IDLE: if (upd_valid && !os_freeze) begin
          pg  <= upd_page;
          idx <= IW'(page_hash12(upd_page));
          now <= now + 1'b1;
          st  <= S_LOOK;
        end
        S_LOOK: begin
          cur <= look_e;
          if (look_e.flags[0] && look_e.page == pg) begin
            n_hits <= n_hits + 1;
            ret    <= R_UPDATE;
            st     <= S_UNL1;
          end else begin
            n_misses <= n_misses + 1;
            ret      <= R_WB;
            st       <= look_e.flags[0] ? S_UNL1 : S_FETCH;
          end
        end
        // unlink `cur` (stored at idx) from queue cur.qnum
        S_UNL1: begin
          if (cur.prev != PTR_NIL) tab[ix(cur.prev)].next <= cur.next;
          else                     head[cur.qnum]         <= cur.next;
          st <= S_UNL2;
        end
        S_UNL2: begin
          if (cur.next != PTR_NIL) tab[ix(cur.next)].prev <= cur.prev;
          else                     tail[cur.qnum]         <= cur.prev;
          unique case (ret)
            R_UPDATE: st <= S_UPDATE;
            R_WB:     st <= S_WB;
            default:  st <= S_DEM;
          endcase
        end
        S_WB: if (mem_req_ready) begin
          tab[idx].flags <= '0;
          st <= S_FETCH;
        end
        S_FETCH: if (mem_req_ready) st <= S_WAIT;
        S_WAIT: if (mem_rsp_valid) begin
          if (mem_rsp_desc.flags[0]) begin
            cur      <= mem_rsp_desc;
            cur.page <= pg;
          end else begin
            cur        <= '0;
            cur.page   <= pg;
            cur.flags  <= 3'b001;
          end
          st <= S_UPDATE;
        end
        S_UPDATE: begin
          cur.refcnt <= ref_inc;
          cur.last   <= now;
          if (cur.qnum != QW'(QUEUES - 1) &&
              32'(ref_inc) >= (32'd1 << (cur.qnum + 1))) begin
            cur.qnum     <= cur.qnum + 1'b1;
            n_promotions <= n_promotions + 1;
          end
          after_dem <= 1'b0;
          st <= S_LINK1;
        end
        // link `cur` at idx to the head of queue cur.qnum
        S_LINK1: begin
          tab[idx]      <= cur;
          tab[idx].prev <= PTR_NIL;
          tab[idx].next <= head[cur.qnum];
          st <= S_LINK2;
        end
        S_LINK2: begin
          if (head[cur.qnum] != PTR_NIL) tab[ix(head[cur.qnum])].prev <= ptr(idx);
          else                           tail[cur.qnum]                <= ptr(idx);
          head[cur.qnum] <= ptr(idx);
          if (after_dem) begin
            if (k == QW'(QUEUES - 1)) st <= S_IDLE;
            else begin k <= k + 1'b1; st <= S_EXP; end
          end else begin
            k  <= QW'(1);
            st <= S_EXP;
          end
        end
        // expiration scan: tail of queue k
        S_EXP: begin
          if (tail_k != PTR_NIL && (now - tail_e.last) > time_t'(LIFETIME)) begin
            cur <= tail_e;
            idx <= ix(tail_k);
            ret <= R_DEM;
            st  <= S_UNL1;
          end else if (k == QW'(QUEUES - 1)) begin
            st <= S_IDLE;
          end else begin
            k <= k + 1'b1;
          end
        end
        S_DEM: begin
          cur.qnum    <= k - 1'b1;
          cur.last    <= now;
          n_demotions <= n_demotions + 1;
          after_dem   <= 1'b1;
          st          <= S_LINK1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // list invariant: a non-empty queue has both ends, an empty one neither
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
    end else if (st == S_IDLE)
      for (int q = 0; q < int'(QUEUES); q++)
        a_ends: assert ((head[q] == PTR_NIL) == (tail[q] == PTR_NIL));
  end
endmodule
