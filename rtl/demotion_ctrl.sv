// demotion_ctrl: the Demotion module for one rank. It moves the rank down a chain of
// low-power states while it is idle and brings it back to the active state when it
// is needed.
//
// The demotion configuration is a vector of power-down timeouts Delta_1..Delta_M,
// one per low-power state S_1..S_M, ordered from the highest-power state (ACT_PDN
// on DDR3) to the lowest (SR_SLOW). While the rank is idle, an idle counter t
// counts the cycles of the current idle period; the rank is in state S_I(t), where
// I(t) is the largest i with Delta_i < t (ACT if there is none), so a state whose
// timeout is not below the next one's is skipped and an all-ones timeout disables
// a state. A request to the rank (access_req) in a low-power state S_i starts a
// resynchronisation of RESYNC_CYC[i] cycles, after which the rank is ACT and ready.
// Any activity (access_req or busy) ends the idle period: its length is reported
// with a one-cycle idle_end pulse for the idle-period histogram.
//
// The OS writes the configuration at the beginning of each slot (cfg_we, cfg_idx =
// 1..M, cfg_val); after reset every timeout is all ones, i.e. the rank never leaves
// ACT until configured. Per-state cycle counters give the time breakdown.
//
// Timing: state changes take effect on the clock edge after the condition; `ready`
// is high in ACT without a resynchronisation in progress.
//
// From the paper: the chain of demotions with one timeout per state, I(t) as in the
// energy equation, the five DDR3 low-power states and their resynchronisation
// times (6, 18, 24, 768, 6768 ns). This design's choices: a cycle is the 2.66 GHz
// reference cycle in which the slot length is given (1e8 cycles, about 40 ms), so
// the times become 16, 48, 64, 2043 and 18003 cycles (rounded up); reset values.
module demotion_ctrl
  import ramzzz_pkg::*;
#(
  parameter int unsigned NLP = NUM_LP,
  parameter int unsigned RESYNC_CYC [NLP] = '{16, 48, 64, 2043, 18003}
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    cfg_we,
  input  logic [PSTATE_W-1:0] cfg_idx,   // 1..NLP
  input  time_t   cfg_val,
  input  logic    access_req,
  input  logic    busy,
  output pstate_t state,
  output logic    ready,
  output logic    resyncing,
  output logic    idle_end,
  output time_t   idle_len,
  output logic [31:0] n_resyncs,
  output logic [31:0] state_cycles [NLP+1]   // [0] = ACT (incl. busy), [i] = S_i
);
  time_t               delta [NLP];
  time_t               idle_cnt;
  logic [15:0]         rs_cnt;
  pstate_t             target;
  time_t               len_next;
  logic                active;

  assign active   = access_req || busy;
  assign ready    = (state == PS_ACT) && !resyncing;
  assign len_next = (idle_cnt == '1) ? idle_cnt : idle_cnt + 1'b1;

  // I(t): the largest i with Delta_i < t
  always_comb begin
    target = PS_ACT;
    for (int i = 0; i < int'(NLP); i++)
      if (delta[i] < len_next) target = PSTATE_W'(i + 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(NLP); i++) delta[i] <= '1;
      for (int i = 0; i <= int'(NLP); i++) state_cycles[i] <= '0;
      state     <= PS_ACT;
      idle_cnt  <= '0;
      rs_cnt    <= '0;
      resyncing <= 1'b0;
      idle_end  <= 1'b0;
      idle_len  <= '0;
      n_resyncs <= '0;
    end else begin
      idle_end <= 1'b0;
      if (cfg_we && cfg_idx != '0 && cfg_idx <= PSTATE_W'(NLP))
        delta[cfg_idx - 1'b1] <= cfg_val;
      if (!resyncing) state_cycles[state] <= state_cycles[state] + 1;

      if (resyncing) begin
        if (rs_cnt <= 16'd1) begin
          resyncing <= 1'b0;
          state     <= PS_ACT;
        end
        rs_cnt <= rs_cnt - 1'b1;
      end else if (active) begin
        if (idle_cnt != '0) begin
          idle_end <= 1'b1;
          idle_len <= idle_cnt;
        end
        idle_cnt <= '0;
        if (state != PS_ACT && access_req) begin
          n_resyncs <= n_resyncs + 1;
          if (RESYNC_CYC[state - 1'b1] == 0) state <= PS_ACT;
          else begin
            resyncing <= 1'b1;
            rs_cnt    <= 16'(RESYNC_CYC[state - 1'b1]);
          end
        end
      end else begin
        idle_cnt <= len_next;
        if (target > state) state <= target;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
    end else a_state_range: assert (state <= PSTATE_W'(NLP));
  end
endmodule
