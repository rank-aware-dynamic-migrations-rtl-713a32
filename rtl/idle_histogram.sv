// idle_histogram: the idle-period histogram of one rank over one slot, the input of
// the OS prediction model that chooses the next slot's demotion configuration.
//
// A full histogram of a slot of T cycles would need T counters. Since at most
// sqrt(T) idle periods can be longer than sqrt(T) cycles, the histogram is kept in
// two arrays of sqrt(T) integers: short[i] counts the idle periods of exactly i
// cycles for i <= SQRT_T, and long_len[] lists the lengths of the idle periods
// longer than SQRT_T, in order of arrival (long_cnt of them). For T = 1e8 this is
// 2 x 10^4 32-bit integers (80 KB) instead of 10^8.
//
// How: two banks of both arrays alternate. During a slot, idle_end events (length
// idle_len) are recorded in the active bank: short[len] += 1 or long_len[long_cnt++]
// = len. At slot_start the banks swap; the OS then reads the finished slot's bank
// through os_rd_* and every read clears the word it returns, so the bank is empty
// again when it becomes active. After reset both banks are cleared by a sweep of
// SQRT_T+1 cycles (init_done); events during the sweep are not recorded. Long
// periods beyond SQRT_T in one slot cannot occur for a slot of SQRT_T^2 cycles;
// should they, they are counted in `overflow`.
//
// Timing: an event is recorded on the clock edge after idle_end; the OS read port
// has one cycle of latency (os_rd_sel: 0 = short counters, 1 = long lengths).
//
// From the paper: the split into short counters and an array of long lengths, the
// sqrt(T) sizes, 32-bit integers. This design's choices: the two banks, clear on
// read, the reset sweep.
module idle_histogram
  import ramzzz_pkg::*;
#(
  parameter int unsigned SQRT_T = 10000     // slot T = 1e8 cycles
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  slot_start,
  input  logic  idle_end,
  input  time_t idle_len,
  input  logic  os_rd_en,
  input  logic  os_rd_sel,
  input  logic [$clog2(SQRT_T+1)-1:0] os_rd_idx,
  output logic [31:0] os_rd_data,
  output logic [$clog2(SQRT_T+1)-1:0] os_long_cnt,   // long entries of the finished slot
  output logic  init_done,
  output logic [31:0] overflow
);
  localparam int unsigned AW = $clog2(SQRT_T + 1);

  logic [31:0] short0 [SQRT_T+1];
  logic [31:0] short1 [SQRT_T+1];
  logic [31:0] long0  [SQRT_T];
  logic [31:0] long1  [SQRT_T];
  logic        bank;                   // bank being recorded
  logic [AW-1:0] long_cnt;             // entries in the active bank
  logic [AW-1:0] init_idx;
  logic        is_short;
  logic [AW-1:0] sidx;

  assign is_short = (idle_len <= time_t'(SQRT_T));
  assign sidx     = AW'(idle_len);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bank        <= 1'b0;
      long_cnt    <= '0;
      os_long_cnt <= '0;
      init_idx    <= '0;
      init_done   <= 1'b0;
      overflow    <= '0;
    end else begin
      if (!init_done) begin
        init_idx <= init_idx + 1'b1;
        if (init_idx == AW'(SQRT_T)) init_done <= 1'b1;
      end
      if (slot_start) begin
        bank        <= !bank;
        os_long_cnt <= long_cnt;
        long_cnt    <= '0;
      end else if (init_done && idle_end && !is_short) begin
        if (long_cnt == AW'(SQRT_T)) overflow <= overflow + 1;
        else long_cnt <= long_cnt + 1'b1;
      end
    end
  end

  // bank 0
  always_ff @(posedge clk) begin
    if (!init_done) begin
      short0[init_idx] <= '0;
      if (init_idx < AW'(SQRT_T)) long0[init_idx] <= '0;
    end else if (bank == 1'b0) begin
      if (idle_end && !slot_start) begin
        if (is_short) short0[sidx] <= short0[sidx] + 1;
        else if (long_cnt < AW'(SQRT_T)) long0[long_cnt] <= 32'(idle_len);
      end
    end else if (os_rd_en) begin
      if (!os_rd_sel) short0[os_rd_idx] <= '0;
      else if (os_rd_idx < AW'(SQRT_T)) long0[os_rd_idx] <= '0;
    end
  end

  // bank 1
  always_ff @(posedge clk) begin
    if (!init_done) begin
      short1[init_idx] <= '0;
      if (init_idx < AW'(SQRT_T)) long1[init_idx] <= '0;
    end else if (bank == 1'b1) begin
      if (idle_end && !slot_start) begin
        if (is_short) short1[sidx] <= short1[sidx] + 1;
        else if (long_cnt < AW'(SQRT_T)) long1[long_cnt] <= 32'(idle_len);
      end
    end else if (os_rd_en) begin
      if (!os_rd_sel) short1[os_rd_idx] <= '0;
      else if (os_rd_idx < AW'(SQRT_T)) long1[os_rd_idx] <= '0;
    end
  end

  // OS read of the finished (inactive) bank
  always_ff @(posedge clk) begin
    if (os_rd_en) begin
      if (!os_rd_sel) os_rd_data <= bank ? short0[os_rd_idx] : short1[os_rd_idx];
      else            os_rd_data <= (os_rd_idx >= AW'(SQRT_T)) ? 32'd0 :
                                    (bank ? long0[os_rd_idx] : long1[os_rd_idx]);
    end
  end
endmodule
