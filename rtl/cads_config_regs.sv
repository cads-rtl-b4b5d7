// cads_config_regs: programmable settings of the CADS learner.
//
// Register map (16-bit registers, written one per clock with wr_en):
//   0  alpha    learning rate, Q8.8, reset 0.15 (38/256)
//   1  gamma    discount of future rewards, Q8.8, reset 0.9 (230/256)
//   2  epsilon  exploration probability, value/65536, reset 0.1 (6554)
//   4..7   K0..K3 MRStarvation thresholds (Q8.8) that split starvation into
//          four classes (very low .. very high)
//   16..31 reward of rule {max_class, min_class} (Q8.8), entry 16+4*max+min
// Alpha, gamma and epsilon reset to the values of the original work. The
// original work derived the thresholds from profiling and does not print them,
// nor the 16 reward values; the reset values here are this design's choice:
// thresholds 0, 4, 16 and 64 cycles per access, and a reward of
// 1.0, 0.5, 0.25, 0 for a class spread (max-min) of 0, 1, 2, 3 (a fair
// schedule earns most, a very unfair one nothing). Writes to other addresses
// are ignored. Synchronous active-low reset.
module cads_config_regs
  import cads_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  logic [4:0]  wr_addr,
  input  logic [15:0] wr_data,
  output cfg_t        cfg
);
  function automatic cfg_t reset_cfg();
    cfg_t c;
    c.alpha   = ALPHA_D;
    c.gamma   = GAMMA_D;
    c.epsilon = EPSILON_D;
    c.thr[0]  = 16'd0;
    c.thr[1]  = 16'd4  << FRAC;
    c.thr[2]  = 16'd16 << FRAC;
    c.thr[3]  = 16'd64 << FRAC;
    for (int mx = 0; mx < 4; mx++)
      for (int mn = 0; mn < 4; mn++)
        case ((mx > mn) ? mx - mn : 0)
          0:       c.rule_reward[4*mx+mn] = 16'd256;  // 1.0
          1:       c.rule_reward[4*mx+mn] = 16'd128;  // 0.5
          2:       c.rule_reward[4*mx+mn] = 16'd64;   // 0.25
          default: c.rule_reward[4*mx+mn] = 16'd0;
        endcase
    return c;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) cfg <= reset_cfg();
    else if (wr_en) begin
      unique casez (wr_addr)
        5'd0:     cfg.alpha   <= fix_t'(wr_data);
        5'd1:     cfg.gamma   <= fix_t'(wr_data);
        5'd2:     cfg.epsilon <= wr_data;
        5'b001??: cfg.thr[wr_addr[1:0]] <= wr_data;
        5'b1????: cfg.rule_reward[wr_addr[3:0]] <= wr_data;
        default:  ;
      endcase
    end
  end
endmodule
