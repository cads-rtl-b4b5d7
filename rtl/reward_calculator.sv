// reward_calculator: first half of parallel level 2, the environment reward.
//
// Keeps one stall-time counter per core: it counts DRAM cycles (dram_tick)
// during which the core has a petition waiting and is cleared when the core
// has none left, as in the original hardware description. The counters
// saturate at 16 bits (this design's choice).
// On a start pulse it sends the cores through the single mrs_divider, one per
// clock, to get MRStarvation = StallTime / NumPet, classifies each result with
// reward_rules, tracks the highest and lowest class among cores with waiting
// petitions, then picks the rule and reads its reward.
//
// Timing: start is accepted when busy is low; done pulses NCORES+3 clocks
// after the start clock: one to fill the pipe, NCORES divisions, one to select
// the rule and one to produce the reward (seven clocks for four cores, as in
// the original description). reward holds until the next done.
module reward_calculator
  import cads_pkg::*;
#(
  parameter int unsigned NCORES = NCORES_D,
  parameter int unsigned NW     = 7
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       dram_tick,
  input  logic [NCORES-1:0][NW-1:0]  num_pet,
  input  logic [3:0][15:0]           thr,
  input  logic [15:0][W-1:0]         rule_reward,
  input  logic                       start,
  output logic                       busy,
  output logic                       done,
  output fix_t                       reward,
  output logic [NCORES-1:0][15:0]    stall_time,
  output logic [15:0]                last_mrs_max   // largest MRStarvation seen in the last pass
);
  localparam int unsigned CW = $clog2(NCORES);

  // stall-time counters
  always_ff @(posedge clk) begin
    if (!rst_n) stall_time <= '0;
    else begin
      for (int k = 0; k < NCORES; k++) begin
        if (num_pet[k] == '0)                           stall_time[k] <= '0;
        else if (dram_tick && stall_time[k] != 16'hFFFF) stall_time[k] <= stall_time[k] + 16'd1;
      end
    end
  end

  typedef enum logic [2:0] {S_IDLE, S_RUN, S_DRAIN, S_RULE, S_REWARD} state_t;
  state_t state;
  logic [CW-1:0] idx;

  logic          d_valid;
  logic [CW-1:0] d_tag;
  logic [15:0]   d_mrs;
  logic [NCORES-1:0] active_q;

  mrs_divider #(.NW(NW), .CW(CW)) u_div (
    .clk(clk), .rst_n(rst_n),
    .in_valid(state == S_RUN), .in_tag(idx),
    .stall(stall_time[idx]), .num(num_pet[idx]),
    .out_valid(d_valid), .out_tag(d_tag), .mrs(d_mrs)
  );

  logic [1:0] lvl, mx_lvl, mn_lvl, rmax, rmin;
  logic       any_act, ract;
  logic [15:0] mrs_max;
  fix_t       rule_out;

  reward_rules u_rules (
    .mrs(d_mrs), .thr(thr), .level(lvl),
    .any_active(ract), .max_level(rmax), .min_level(rmin),
    .rule_reward(rule_reward), .reward(rule_out)
  );

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      idx      <= '0;
      active_q <= '0;
      any_act  <= 1'b0;
      mx_lvl   <= '0;
      mn_lvl   <= '0;
      rmax     <= '0;
      rmin     <= '0;
      ract     <= 1'b0;
      mrs_max  <= '0;
      last_mrs_max <= '0;
      done     <= 1'b0;
      reward   <= '0;
    end else begin
      done <= 1'b0;
      if (state == S_RUN) active_q[idx] <= (num_pet[idx] != '0);
      if (d_valid && active_q[d_tag]) begin
        any_act <= 1'b1;
        if (!any_act || lvl > mx_lvl) mx_lvl <= lvl;
        if (!any_act || lvl < mn_lvl) mn_lvl <= lvl;
        if (!any_act || d_mrs > mrs_max) mrs_max <= d_mrs;
      end
      unique case (state)
        S_IDLE: if (start) begin
          state   <= S_RUN;
          idx     <= '0;
          any_act <= 1'b0;
          mrs_max <= '0;
        end
        S_RUN: begin
          if (idx == CW'(NCORES-1)) state <= S_DRAIN;
          else                      idx   <= idx + 1'b1;
        end
        S_DRAIN: state <= S_RULE;
        S_RULE: begin              // select the rule
          rmax  <= mx_lvl;
          rmin  <= mn_lvl;
          ract  <= any_act;
          state <= S_REWARD;
        end
        S_REWARD: begin            // evaluate it
          reward       <= rule_out;
          last_mrs_max <= mrs_max;
          done         <= 1'b1;
          state        <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
