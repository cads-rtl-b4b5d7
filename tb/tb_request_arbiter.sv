// tb_request_arbiter: random buffer contents (few banks and rows so that row
// hits are common), random bank readiness and selected core. A reference with
// its own open-row table picks, oldest first: a row hit of the selected core,
// a row hit of any core, a ready petition of the selected core, any ready
// petition. Checks the grant, the rule used, the hit flag, the FR-FCFS core
// and the set of cores with ready petitions, and counts each rule.
module tb_request_arbiter;
  import cads_pkg::*;
  localparam int unsigned NCORES = 16, NBUF = 64, NBANKS = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NBUF-1:0] ent_valid; req_t [NBUF-1:0] ent_req;
  logic [NBANKS-1:0] bank_ready;
  logic sel_valid, issue, gnt_valid, gnt_hit;
  logic [3:0] sel_core, frfcfs_core; logic [5:0] gnt_idx; req_t gnt_req;
  logic [1:0] gnt_rule; logic [NCORES-1:0] core_ready;

  request_arbiter dut (.*);

  bit open_v[NBANKS]; int open_r[NBANKS];
  int rule_cnt[4];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    foreach (open_v[b]) open_v[b] = 0;
    foreach (rule_cnt[i]) rule_cnt[i] = 0;
    ent_valid = '0; ent_req = '0; bank_ready = '0; sel_valid = 0; sel_core = 0; issue = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      int cnt, exp_idx, exp_rule, fr; logic [NCORES-1:0] exp_ready; bit any;
      int c1, c2, c3, c4;
      @(negedge clk);
      cnt = $urandom_range(0, NBUF);
      for (int e = 0; e < NBUF; e++) begin
        ent_valid[e] = (e < cnt);
        ent_req[e] = '{core: 8'($urandom_range(0, (n % 2) ? 3 : 15)), bank: 8'($urandom_range(0, 5)),
                       row: 16'($urandom_range(0, 1)), wr: 1'($urandom)};
      end
      bank_ready = NBANKS'($urandom) | NBANKS'($urandom);
      sel_valid  = (n % 9 != 0);
      sel_core   = 4'($urandom_range(0, (n % 2) ? 3 : 15));
      issue      = 1'($urandom);
      #1;
      c1 = -1; c2 = -1; c3 = -1; c4 = -1; exp_ready = '0;
      for (int e = NBUF-1; e >= 0; e--) if (ent_valid[e] && bank_ready[ent_req[e].bank]) begin
        bit h, m;
        h = open_v[ent_req[e].bank] && open_r[ent_req[e].bank] == ent_req[e].row;
        m = sel_valid && ent_req[e].core == sel_core;
        exp_ready[ent_req[e].core] = 1;
        if (h && m) c1 = e;
        if (h) c2 = e;
        if (m) c3 = e;
        c4 = e;
      end
      any = (c4 >= 0);
      if (c1 >= 0) begin exp_idx = c1; exp_rule = 0; end
      else if (c2 >= 0) begin exp_idx = c2; exp_rule = 1; end
      else if (c3 >= 0) begin exp_idx = c3; exp_rule = 2; end
      else begin exp_idx = c4; exp_rule = 3; end
      fr = (c2 >= 0) ? c2 : c4;
      check(gnt_valid == any, "gnt_valid");
      check(core_ready == exp_ready, "core_ready");
      if (any) begin
        check(int'(gnt_idx) == exp_idx && int'(gnt_rule) == exp_rule, $sformatf("grant %0d rule %0d exp %0d rule %0d", gnt_idx, gnt_rule, exp_idx, exp_rule));
        check(gnt_req == ent_req[exp_idx], "granted petition");
        check(gnt_hit == (exp_rule < 2), "hit flag");
        check(int'(frfcfs_core) == int'(ent_req[fr].core), "FR-FCFS core");
        if (issue) begin
          rule_cnt[exp_rule]++;
          open_v[ent_req[exp_idx].bank] = 1; open_r[ent_req[exp_idx].bank] = ent_req[exp_idx].row;
        end
      end
      @(posedge clk);
    end
    $display("rules used: %0d %0d %0d %0d", rule_cnt[0], rule_cnt[1], rule_cnt[2], rule_cnt[3]);
    foreach (rule_cnt[i]) check(rule_cnt[i] > 0, $sformatf("rule %0d used", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
