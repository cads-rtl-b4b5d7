// qlearn_update: second half of parallel level 2, the Q-learning rule.
//
// After each decision it updates the model of the core chosen by the previous
// decision:
//   delta   = CurrentReward + gamma * CoreMaxReward - PreviousReward
//   theta_i = theta_i + alpha * delta * f_i          (i = 0..3)
// where CoreMaxReward is the maximum predicted reward of the new decision,
// PreviousReward the predicted reward of the previously selected core and f_i
// the features that core had when it was selected. It then stores the new
// decision (selected core, its predicted reward and features) as "previous".
// The first decision after reset, and any decision with no ready core, only
// stores / is skipped. The datapath has one multiplier and one adder, used
// over several clocks, since the update is off the critical path:
//   G  : g   = gamma * max          D  : d  = cur + g       E : d = d - prev
//   A  : ad  = alpha * d            T_i: theta_i += ad * f_i (four clocks)
// All values are Q8.8 with saturation.
//
// Departure from the printed rule: equation (5) multiplies the error by
// theta_i itself, but the algorithm starts all theta at zero, so that product
// would never move them. The standard gradient form with the feature f_i is
// used. The printed algorithm stores MaxReward as the previous reward, while
// the hardware figure feeds "Reward Selected Core" to the update; the figure
// is followed, so an exploratory (FR-FCFS) choice is judged by its own
// prediction.
//
// Timing: start is accepted when busy is low. Counting the start edge as 0,
// done is high after edge 9 when an update is made, after edge 1 when the
// decision is only stored, and after edge 0 when it is skipped. One theta write per clock
// on th_we/th_core/th_idx/th_data.
module qlearn_update
  import cads_pkg::*;
#(
  parameter int unsigned NCORES = NCORES_D
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  output logic                       busy,
  input  fix_t                       alpha,
  input  fix_t                       gamma,
  input  fix_t                       cur_reward,
  input  fix_t                       max_reward,
  input  logic                       sel_valid,
  input  logic [$clog2(NCORES)-1:0]  sel_core,
  input  fix_t                       sel_reward,
  input  feat_t [NFEAT-1:0]          sel_feat,
  input  fix_t  [NCORES-1:0][NFEAT-1:0] theta,
  output logic                       th_we,
  output logic [$clog2(NCORES)-1:0]  th_core,
  output logic [1:0]                 th_idx,
  output fix_t                       th_data,
  output logic                       done,
  output logic                       updated   // done of a pass that wrote theta
);
  localparam int unsigned CW = $clog2(NCORES);

  typedef enum logic [2:0] {S_IDLE, S_G, S_D, S_E, S_A, S_T, S_STORE} state_t;
  state_t state;

  // the previous decision
  logic              prev_valid;
  logic [CW-1:0]     prev_core;
  fix_t              prev_reward;
  feat_t [NFEAT-1:0] prev_feat;

  // the new decision, latched at start
  fix_t              cur_q, max_q;
  logic [CW-1:0]     new_core;
  fix_t              new_reward;
  feat_t [NFEAT-1:0] new_feat;

  fix_t       acc;
  logic [1:0] ti;
  logic       wrote;

  // the one multiplier and the one adder
  fix_t  mul_a, mul_b, mul_p, add_a, add_b, add_s;
  feat_t mul_f;
  logic  mul_by_feat;
  always_comb begin
    mul_a = '0; mul_b = '0; mul_f = '0; mul_by_feat = 1'b0;
    unique case (state)
      S_G: begin mul_a = gamma; mul_b = max_q; end
      S_A: begin mul_a = alpha; mul_b = acc; end
      S_T: begin mul_a = acc; mul_f = prev_feat[ti]; mul_by_feat = 1'b1; end
      default: ;
    endcase
    mul_p = mul_by_feat ? fmul_feat(mul_a, mul_f) : fmul(mul_a, mul_b);
  end

  always_comb begin
    add_a = '0; add_b = '0;
    unique case (state)
      S_D: begin add_a = cur_q; add_b = acc; end
      S_E: begin add_a = acc;   add_b = (prev_reward == FIX_MIN) ? FIX_MAX : -prev_reward; end
      S_T: begin add_a = theta[prev_core][ti]; add_b = mul_p; end
      default: ;
    endcase
    add_s = fadd(add_a, add_b);
  end

  assign busy    = (state != S_IDLE);
  assign th_we   = (state == S_T);
  assign th_core = prev_core;
  assign th_idx  = ti;
  assign th_data = add_s;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      prev_valid  <= 1'b0;
      prev_core   <= '0;
      prev_reward <= '0;
      prev_feat   <= '0;
      cur_q       <= '0;
      max_q       <= '0;
      new_core    <= '0;
      new_reward  <= '0;
      new_feat    <= '0;
      acc         <= '0;
      ti          <= '0;
      wrote       <= 1'b0;
      done        <= 1'b0;
      updated     <= 1'b0;
    end else begin
      done    <= 1'b0;
      updated <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          if (!sel_valid) begin
            done <= 1'b1;            // no action was taken: nothing to learn
          end else begin
            cur_q      <= cur_reward;
            max_q      <= max_reward;
            new_core   <= sel_core;
            new_reward <= sel_reward;
            new_feat   <= sel_feat;
            wrote      <= prev_valid;
            state      <= prev_valid ? S_G : S_STORE;
          end
        end
        S_G: begin acc <= mul_p; state <= S_D; end
        S_D: begin acc <= add_s; state <= S_E; end
        S_E: begin acc <= add_s; state <= S_A; end
        S_A: begin acc <= mul_p; ti <= '0; state <= S_T; end
        S_T: begin
          ti <= ti + 2'd1;
          if (ti == 2'd3) state <= S_STORE;
        end
        S_STORE: begin
          prev_valid  <= 1'b1;
          prev_core   <= new_core;
          prev_reward <= new_reward;
          prev_feat   <= new_feat;
          done        <= 1'b1;
          updated     <= wrote;
          state       <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
