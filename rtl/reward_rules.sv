// reward_rules: the rule table of the reward calculator (RULES).
//
// Two combinational functions:
//  * classify: maps one core's MRStarvation to one of four starvation classes
//    with the thresholds K0..K3: class = the largest i with mrs >= K_i
//    (0 = very low .. 3 = very high; 0 also when mrs < K0).
//  * rule: the environment reward is one of 16 values, chosen by the pair
//    (highest class, lowest class) over the cores that have waiting petitions,
//    reward = rule_reward[4*max_class + min_class]. Equal classes mean a fair
//    schedule and pick the largest reward in the reset table.
// The original work states 16 rules built from four starvation classes, each
// comparing a core's MRStarvation with the thresholds, without listing them;
// indexing the rules by the most and least starved class is this design's
// reading, since it gives exactly 16 rules for any number of cores. When no
// core is active (any_active low) the fair-schedule reward rule_reward[0] is
// used.
module reward_rules
  import cads_pkg::*;
(
  input  logic [15:0]         mrs,
  input  logic [3:0][15:0]    thr,
  output logic [1:0]          level,
  input  logic                any_active,
  input  logic [1:0]          max_level,
  input  logic [1:0]          min_level,
  input  logic [15:0][W-1:0]  rule_reward,
  output fix_t                reward
);
  always_comb begin
    level = 2'd0;
    for (int i = 0; i < 4; i++)
      if (mrs >= thr[i]) level = 2'(i);
  end

  always_comb begin
    if (any_active) reward = fix_t'(rule_reward[{max_level, min_level}]);
    else            reward = fix_t'(rule_reward[0]);
  end
endmodule
