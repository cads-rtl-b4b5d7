// cads_top: the CADS (Core-Aware Dynamic Scheduler) memory request scheduler.
//
// Petitions from the cores enter the request buffer (refused while it is full,
// and then re-sent by the core). Once per DRAM cycle (dram_tick, one CPU clock
// in every CLK_RATIO) the arbiter issues one ready petition to the DRAM
// command side, ordered by the core CADS currently favours. Two parallel
// levels run beside it on the fast CPU clock:
//   level 1  next_core_select: predicted reward of every core model from the
//            features (feature_counters) and parameters (theta_regfile), the
//            maximum over cores with a ready petition, and the epsilon-greedy
//            choice between that core and the FR-FCFS core;
//   level 2  reward_calculator: the environment reward from the starvation of
//            the cores; then qlearn_update: the Q-learning update of the model
//            of the previously selected core.
// A decision (level 1 and the reward pass) is started on a DRAM tick when both
// are idle and the previous decision has been handed to the Q-learning unit,
// whose update then overlaps the next decision. The chosen core is used by the
// arbiter from the clock level 1 finishes until the next decision finishes.
// With 16 cores and one lane level 1 takes 18 clocks and the reward pass 19,
// so a new decision starts every third DRAM cycle
// (the original work aims at one per DRAM cycle but gives its cycle counts
// for four cores; see the documentation).
//
// Interface: req_valid/req with req_accept (taken this clock) and req_full;
// bank_ready from the DRAM side; iss_valid/iss_req pulse for one clock on a
// DRAM tick when a petition is issued; cfg_* write the learner settings
// (see cads_config_regs). The dec_* outputs report each decision.
// Synchronous active-low reset.
module cads_top
  import cads_pkg::*;
#(
  parameter int unsigned NCORES    = NCORES_D,
  parameter int unsigned NBUF      = NBUF_D,
  parameter int unsigned NBANKS    = NBANKS_D,
  parameter int unsigned HIST_LEN  = HIST_LEN_D,
  parameter int unsigned CLK_RATIO = 9,
  parameter int unsigned LANES     = 1     // core models per clock in level 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  output logic                       dram_tick,
  // petitions from the cores
  input  logic                       req_valid,
  input  req_t                       req,
  output logic                       req_accept,
  output logic                       req_full,
  // DRAM command side
  input  logic [NBANKS-1:0]          bank_ready,
  output logic                       iss_valid,
  output req_t                       iss_req,
  output logic                       iss_hit,
  output logic [1:0]                 iss_rule,
  // configuration
  input  logic                       cfg_wr_en,
  input  logic [4:0]                 cfg_wr_addr,
  input  logic [15:0]                cfg_wr_data,
  // decision report
  output logic                       dec_done,
  output logic                       dec_valid,
  output logic                       dec_explore,
  output logic [$clog2(NCORES)-1:0]  dec_core,
  output fix_t                       dec_max_reward,
  output logic                       rew_done,
  output fix_t                       rew_value,
  output logic                       q_updated,
  output logic [$clog2(NBUF):0]      buf_count,
  output logic [15:0]                starv_max   // largest MRStarvation of the last reward pass
);
  localparam int unsigned CW = $clog2(NCORES);
  localparam int unsigned IW = $clog2(NBUF);
  localparam int unsigned NW = $clog2(NBUF) + 1;

  // DRAM cycle strobe
  logic [$clog2(CLK_RATIO+1)-1:0] tick_cnt;
  always_ff @(posedge clk) begin
    if (!rst_n) tick_cnt <= '0;
    else        tick_cnt <= (tick_cnt == ($clog2(CLK_RATIO+1))'(CLK_RATIO-1)) ? '0 : tick_cnt + 1'b1;
  end
  assign dram_tick = (tick_cnt == ($clog2(CLK_RATIO+1))'(CLK_RATIO-1));

  // configuration
  cfg_t cfg;
  cads_config_regs u_cfg (.clk(clk), .rst_n(rst_n), .wr_en(cfg_wr_en),
                          .wr_addr(cfg_wr_addr), .wr_data(cfg_wr_data), .cfg(cfg));

  // request buffer
  logic [NBUF-1:0] ent_valid;
  req_t [NBUF-1:0] ent_req;
  logic [NW-1:0]   count;
  logic            gnt_valid, gnt_hit;
  logic [IW-1:0]   gnt_idx;
  req_t            gnt_req;
  logic [1:0]      gnt_rule;
  logic            do_issue;
  assign do_issue = dram_tick && gnt_valid;

  request_buffer #(.NBUF(NBUF)) u_buf (
    .clk(clk), .rst_n(rst_n),
    .enq_valid(req_valid), .enq_req(req), .full(req_full), .enq_accept(req_accept),
    .deq_valid(do_issue), .deq_idx(gnt_idx),
    .ent_valid(ent_valid), .ent_req(ent_req), .count(count)
  );

  // features
  feat_t [NCORES-1:0][NFEAT-1:0] feat;
  feature_counters #(.NCORES(NCORES), .NBUF(NBUF), .NBANKS(NBANKS), .HIST_LEN(HIST_LEN)) u_feat (
    .clk(clk), .rst_n(rst_n),
    .enq_valid(req_accept), .enq_req(req),
    .deq_valid(do_issue), .deq_req(gnt_req),
    .ent_valid(ent_valid), .ent_req(ent_req), .feat(feat)
  );

  // model parameters
  fix_t [NCORES-1:0][NFEAT-1:0] theta;
  logic          th_we;
  logic [CW-1:0] th_core;
  logic [1:0]    th_idx;
  fix_t          th_data;
  theta_regfile #(.NCORES(NCORES), .NTHETA(NFEAT)) u_theta (
    .clk(clk), .rst_n(rst_n), .we(th_we), .wcore(th_core), .widx(th_idx),
    .wdata(th_data), .theta(theta)
  );

  // arbiter, using the latest decision
  logic              cur_sel_valid;
  logic [CW-1:0]     cur_sel_core;
  logic [CW-1:0]     frfcfs_core;
  logic [NCORES-1:0] core_ready;
  request_arbiter #(.NCORES(NCORES), .NBUF(NBUF), .NBANKS(NBANKS)) u_arb (
    .clk(clk), .rst_n(rst_n), .ent_valid(ent_valid), .ent_req(ent_req),
    .bank_ready(bank_ready), .sel_valid(cur_sel_valid), .sel_core(cur_sel_core),
    .issue(do_issue), .gnt_valid(gnt_valid), .gnt_idx(gnt_idx), .gnt_req(gnt_req),
    .gnt_rule(gnt_rule), .gnt_hit(gnt_hit), .frfcfs_core(frfcfs_core), .core_ready(core_ready)
  );

  assign iss_valid = do_issue;
  assign iss_req   = gnt_req;
  assign iss_hit   = gnt_hit;
  assign iss_rule  = gnt_rule;

  // level 1
  logic ncs_busy, ncs_done, rc_busy, rc_done, ql_busy, ql_done, ql_updated;
  logic start_dec;
  logic              s_valid, s_explore;
  logic [CW-1:0]     s_core;
  logic [CW-1:0]     m_core;   // reported through the reward only
  fix_t              s_reward, m_reward;
  feat_t [NFEAT-1:0] s_feat;

  next_core_select #(.NCORES(NCORES), .LANES(LANES)) u_ncs (
    .clk(clk), .rst_n(rst_n), .start(start_dec), .busy(ncs_busy),
    .core_ready(core_ready), .frfcfs_core(frfcfs_core), .epsilon(cfg.epsilon),
    .theta(theta), .feat(feat),
    .done(ncs_done), .sel_valid(s_valid), .sel_explore(s_explore), .sel_core(s_core),
    .sel_reward(s_reward), .sel_feat(s_feat), .max_core(m_core), .max_reward(m_reward)
  );

  // level 2
  logic [NCORES-1:0][NW-1:0]  num_pet;
  logic [NCORES-1:0][15:0]    stall_time;   // internal; read by the divider only
  logic [15:0]                mrs_max;
  fix_t                       cur_reward;
  always_comb begin
    for (int k = 0; k < NCORES; k++) num_pet[k] = feat[k][F_NUMPET][NW-1:0];
  end

  reward_calculator #(.NCORES(NCORES), .NW(NW)) u_rew (
    .clk(clk), .rst_n(rst_n), .dram_tick(dram_tick), .num_pet(num_pet),
    .thr(cfg.thr), .rule_reward(cfg.rule_reward), .start(start_dec),
    .busy(rc_busy), .done(rc_done), .reward(cur_reward),
    .stall_time(stall_time), .last_mrs_max(mrs_max)
  );

  // start the Q-learning update once both halves of the decision are done
  logic l1_ok, l2_ok, ql_start;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      l1_ok <= 1'b0;
      l2_ok <= 1'b0;
    end else if (ql_start) begin
      l1_ok <= 1'b0;
      l2_ok <= 1'b0;
    end else begin
      if (ncs_done) l1_ok <= 1'b1;
      if (rc_done)  l2_ok <= 1'b1;
    end
  end
  assign ql_start  = l1_ok && l2_ok && !ql_busy;
  // the next decision may start while the update of the last one still runs:
  // the update has latched what it needs, and theta is read model by model
  assign start_dec = dram_tick && !ncs_busy && !rc_busy && !l1_ok && !l2_ok;

  qlearn_update #(.NCORES(NCORES)) u_ql (
    .clk(clk), .rst_n(rst_n), .start(ql_start), .busy(ql_busy),
    .alpha(cfg.alpha), .gamma(cfg.gamma), .cur_reward(cur_reward), .max_reward(m_reward),
    .sel_valid(s_valid), .sel_core(s_core), .sel_reward(s_reward), .sel_feat(s_feat),
    .theta(theta), .th_we(th_we), .th_core(th_core), .th_idx(th_idx), .th_data(th_data),
    .done(ql_done), .updated(ql_updated)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cur_sel_valid <= 1'b0;
      cur_sel_core  <= '0;
    end else if (ncs_done) begin
      cur_sel_valid <= s_valid;
      cur_sel_core  <= s_core;
    end
  end

  assign dec_done       = ncs_done;
  assign dec_valid      = s_valid;
  assign dec_explore    = s_explore;
  assign dec_core       = s_core;
  assign dec_max_reward = m_reward;
  assign rew_done       = rc_done;
  assign rew_value      = cur_reward;
  assign q_updated      = ql_updated;
  assign buf_count      = count;
  assign starv_max      = mrs_max;

  a_one_issue_per_tick: assert property (@(posedge clk) disable iff (!rst_n)
    iss_valid |-> dram_tick);
endmodule
