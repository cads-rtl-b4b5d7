// next_core_select: parallel level 1 of CADS, the circuit that picks the core
// whose petitions get priority in the next DRAM cycle.
//
// On a start pulse it streams the NCORES core models through LANES copies of
// core_model_mac (pipeline stage 1), LANES cores per clock, reading each
// core's theta and features. The default is one lane, i.e. four multipliers,
// as in the resource table of the original work; it notes that a wider
// pipeline needs more multipliers and fewer clocks, which LANES provides. Stage 2 (MAX) keeps the largest predicted reward among the cores
// that have a memory-ready petition (core_ready, sampled at start), with the
// lower core index winning a tie. A last clock makes the epsilon-greedy
// choice: if a 16-bit random number is below epsilon the core of the FR-FCFS
// choice (frfcfs_core, sampled at start) is taken, otherwise the core with
// the maximum reward. Outputs are Selected Core, Reward Selected Core (the
// predicted reward of the chosen core), Core Max Reward, and the features of
// the chosen core as they were read, which the Q-learning unit needs later.
//
// Timing: start is accepted when busy is low. done pulses NCORES/LANES+2 clocks
// after the start clock: one to fill the pipe, NCORES/LANES model clocks, one
// for the epsilon choice (six clocks for four cores and one lane, as in the
// original hardware description; 18 clocks for 16 cores and one lane). Within
// a clock the MAX stage takes the lanes in core order. NCORES must be a
// multiple of LANES. sel_valid
// is low when no core had a ready petition. Outputs hold until the next done.
module next_core_select
  import cads_pkg::*;
#(
  parameter int unsigned NCORES = NCORES_D,
  parameter int unsigned LANES  = 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  output logic                   busy,
  input  logic [NCORES-1:0]      core_ready,
  input  logic [$clog2(NCORES)-1:0] frfcfs_core,
  input  logic [15:0]            epsilon,
  input  fix_t  [NCORES-1:0][NFEAT-1:0] theta,
  input  feat_t [NCORES-1:0][NFEAT-1:0] feat,
  output logic                   done,
  output logic                   sel_valid,
  output logic                   sel_explore,   // chosen by the epsilon branch
  output logic [$clog2(NCORES)-1:0] sel_core,
  output fix_t                   sel_reward,
  output feat_t [NFEAT-1:0]      sel_feat,
  output logic [$clog2(NCORES)-1:0] max_core,
  output fix_t                   max_reward
);
  localparam int unsigned CW = $clog2(NCORES);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_PICK} state_t;
  state_t state;

  logic [CW-1:0]     idx;
  logic [NCORES-1:0] ready_q;
  logic [CW-1:0]     fr_q;
  logic [15:0]       rnd, rnd_q;

  lfsr16 u_rng (.clk(clk), .rst_n(rst_n), .en(1'b1), .value(rnd));

  // stage 1: LANES model units
  logic [LANES-1:0]              m_valid;
  logic [LANES-1:0][CW-1:0]      m_core;
  fix_t [LANES-1:0]              m_reward;
  feat_t [LANES-1:0][NFEAT-1:0]  m_feat;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [CW-1:0] c;
    assign c = idx + CW'(l);
    core_model_mac #(.CW(CW)) u_mac (
      .clk(clk), .rst_n(rst_n),
      .in_valid(state == S_RUN), .in_core(c),
      .theta(theta[c]), .feat(feat[c]),
      .out_valid(m_valid[l]), .out_core(m_core[l]), .out_reward(m_reward[l])
    );
    always_ff @(posedge clk) begin
      if (state == S_RUN) m_feat[l] <= feat[c];
    end
  end

  // stage 2 state
  logic              have_max;
  logic [CW-1:0]     mx_core;
  fix_t              mx_reward;
  feat_t [NFEAT-1:0] mx_feat;
  fix_t              fr_reward;
  feat_t [NFEAT-1:0] fr_feat;

  // MAX over this clock's lane results, in core order
  logic              nx_have;
  logic [CW-1:0]     nx_core;
  fix_t              nx_reward;
  feat_t [NFEAT-1:0] nx_feat;
  always_comb begin
    nx_have   = have_max;
    nx_core   = mx_core;
    nx_reward = mx_reward;
    nx_feat   = mx_feat;
    for (int l = 0; l < LANES; l++) begin
      if (m_valid[l] && ready_q[m_core[l]] && (!nx_have || m_reward[l] > nx_reward)) begin
        nx_have   = 1'b1;
        nx_core   = m_core[l];
        nx_reward = m_reward[l];
        nx_feat   = m_feat[l];
      end
    end
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      idx         <= '0;
      ready_q     <= '0;
      fr_q        <= '0;
      rnd_q       <= '0;
      have_max    <= 1'b0;
      mx_core     <= '0;
      mx_reward   <= '0;
      mx_feat     <= '0;
      fr_reward   <= '0;
      fr_feat     <= '0;
      done        <= 1'b0;
      sel_valid   <= 1'b0;
      sel_explore <= 1'b0;
      sel_core    <= '0;
      sel_reward  <= '0;
      sel_feat    <= '0;
      max_core    <= '0;
      max_reward  <= '0;
    end else begin
      done <= 1'b0;
      // MAX over the results coming out of stage 1
      have_max  <= nx_have;
      mx_core   <= nx_core;
      mx_reward <= nx_reward;
      mx_feat   <= nx_feat;
      for (int l = 0; l < LANES; l++) begin
        if (m_valid[l] && m_core[l] == fr_q) begin
          fr_reward <= m_reward[l];
          fr_feat   <= m_feat[l];
        end
      end
      unique case (state)
        S_IDLE: if (start) begin
          state    <= S_RUN;
          idx      <= '0;
          ready_q  <= core_ready;
          fr_q     <= frfcfs_core;
          rnd_q    <= rnd;
          have_max <= 1'b0;
        end
        S_RUN: begin
          if (32'(idx) + LANES >= NCORES) state <= S_DRAIN;
          else                            idx   <= idx + CW'(LANES);
        end
        S_DRAIN: state <= S_PICK;   // last model result enters MAX
        S_PICK: begin
          state       <= S_IDLE;
          done        <= 1'b1;
          sel_valid   <= have_max;
          max_core    <= mx_core;
          max_reward  <= mx_reward;
          if (rnd_q < epsilon && ready_q[fr_q]) begin
            sel_explore <= 1'b1;
            sel_core    <= fr_q;
            sel_reward  <= fr_reward;
            sel_feat    <= fr_feat;
          end else begin
            sel_explore <= 1'b0;
            sel_core    <= mx_core;
            sel_reward  <= mx_reward;
            sel_feat    <= mx_feat;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
