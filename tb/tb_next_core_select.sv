// tb_next_core_select: random models, features and ready sets. The reference
// computes every core's reward (sum theta*f, saturated), the maximum over the
// ready cores (lowest index on ties) and checks Selected Core, Reward Selected
// Core, Core Max Reward and the selected core's features. The decision must
// take NCORES+2 clocks from the start clock to done. With epsilon 0 the
// maximum is always taken; with epsilon 1.0 the FR-FCFS core; with the
// default 0.1 the exploration rate must be near 10 %. A copy with four model
// lanes must reach the same maximum in NCORES/4+2 clocks.
module tb_next_core_select;
  import cads_pkg::*;
  localparam int unsigned NCORES = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, sel_valid, sel_explore;
  logic [NCORES-1:0] core_ready;
  logic [3:0] frfcfs_core, sel_core, max_core;
  logic [15:0] epsilon;
  fix_t [NCORES-1:0][NFEAT-1:0] theta;
  feat_t [NCORES-1:0][NFEAT-1:0] feat;
  fix_t sel_reward, max_reward;
  feat_t [NFEAT-1:0] sel_feat;

  next_core_select dut (.*);

  // a four-lane copy on the same inputs: same decisions, NCORES/4+2 clocks
  logic busy4, done4, sel_valid4, sel_explore4;
  logic [3:0] sel_core4, max_core4;
  fix_t sel_reward4, max_reward4;
  feat_t [NFEAT-1:0] sel_feat4;
  next_core_select #(.NCORES(NCORES), .LANES(4)) dut4 (
    .clk(clk), .rst_n(rst_n), .start(start), .busy(busy4), .core_ready(core_ready),
    .frfcfs_core(frfcfs_core), .epsilon(epsilon), .theta(theta), .feat(feat),
    .done(done4), .sel_valid(sel_valid4), .sel_explore(sel_explore4), .sel_core(sel_core4),
    .sel_reward(sel_reward4), .sel_feat(sel_feat4), .max_core(max_core4), .max_reward(max_reward4));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic fix_t model_reward(int k);
    longint s = 0;
    for (int j = 0; j < NFEAT; j++) s += longint'(theta[k][j]) * longint'(feat[k][j]);
    if (s > 32767) s = 32767;
    if (s < -32768) s = -32768;
    return fix_t'(s);
  endfunction

  int explored = 0, total_mid = 0;

  task automatic one_decision(input logic [15:0] eps, input int mode);
    int lat, best; fix_t bestr; bit any;
    any = 0; best = 0; bestr = 0;
    @(negedge clk);
    for (int k = 0; k < NCORES; k++)
      for (int j = 0; j < NFEAT; j++) begin
        theta[k][j] = fix_t'($signed(16'($urandom_range(0, 511))) - 16'sd256);
        feat[k][j]  = feat_t'($urandom_range(0, 64));
      end
    if (mode == 1) theta = '0;                         // all equal: tie -> lowest ready index
    core_ready  = ($urandom_range(0, 9) == 0) ? '0 : NCORES'($urandom);
    frfcfs_core = 4'($urandom);
    if (core_ready != 0) while (!core_ready[frfcfs_core]) frfcfs_core = 4'($urandom);
    epsilon = eps;
    start = 1;
    @(negedge clk);
    start = 0;
    core_ready = ~core_ready;                          // must have been sampled at start
    lat = 0;   // clocks after the start clock
    while (!done) begin
      if (done4) begin
        check(lat == NCORES / 4 + 2, $sformatf("four-lane latency %0d", lat));
        core_ready = ~core_ready;
        for (int k = 0; k < NCORES; k++)
          if (core_ready[k] && (!any || model_reward(k) > bestr)) begin any = 1; best = k; bestr = model_reward(k); end
        core_ready = ~core_ready;
        check(sel_valid4 == any, "four-lane sel_valid");
        if (any) check(int'(max_core4) == best && max_reward4 == bestr, "four-lane max");
        if (any && !sel_explore4) check(int'(sel_core4) == best && sel_feat4 == feat[best], "four-lane greedy");
        if (any && sel_explore4)  check(sel_core4 == frfcfs_core, "four-lane explore");
      end
      @(negedge clk); lat++;
    end
    check(lat == NCORES + 2, $sformatf("latency %0d", lat));
    any = 0; best = 0; bestr = 0;
    core_ready = ~core_ready;
    for (int k = 0; k < NCORES; k++)
      if (core_ready[k] && (!any || model_reward(k) > bestr)) begin any = 1; best = k; bestr = model_reward(k); end
    check(sel_valid == any, "sel_valid");
    if (any) begin
      check(int'(max_core) == best && max_reward == bestr, $sformatf("max core %0d/%0d", max_core, best));
      if (eps == 0)          check(!sel_explore, "no exploration with epsilon 0");
      if (eps == 16'hFFFF)   check(sel_explore, "exploration with epsilon 1");
      if (sel_explore) begin
        check(sel_core == frfcfs_core && sel_reward == model_reward(int'(frfcfs_core)) &&
              sel_feat == feat[frfcfs_core], "explore picks FR-FCFS core");
        explored++;
      end else begin
        check(int'(sel_core) == best && sel_reward == bestr && sel_feat == feat[best], "greedy picks max core");
      end
      if (eps == 16'd6554) total_mid++;
    end
  endtask

  initial begin
    start = 0; core_ready = 0; frfcfs_core = 0; epsilon = 0; theta = '0; feat = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    repeat (200) one_decision(16'd0, 0);
    repeat (50)  one_decision(16'd0, 1);
    explored = 0;
    repeat (100) one_decision(16'hFFFF, 0);
    explored = 0;
    repeat (1500) one_decision(16'd6554, 0);
    $display("explored %0d of %0d", explored, total_mid);
    check(explored * 100 > total_mid * 6 && explored * 100 < total_mid * 14, "exploration rate near 10 percent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
