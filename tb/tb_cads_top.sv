// tb_cads_top: end-to-end run of the scheduler at its default size (16 cores,
// 64-entry buffer, 32 banks, CPU clock 9x the DRAM clock) against a
// behavioural DRAM bank-timing model.
// Traffic: cores 0-7 are memory intensive (a new petition on half of the DRAM
// cycles, random rows), cores 8-15 are light (5 %, mostly the same row). A
// refused petition stays with its core and is sent again. The run has three
// phases: all cores (the buffer fills and refuses petitions), light cores
// only (it drains), then all cores again after epsilon is written to 0, and
// finally no new traffic until the buffer is empty.
// Checks:
//  * the testbench mirrors the buffer and, at every issue, recomputes the
//    arbiter's choice from the mirror, its own open-row table, bank_ready and
//    the last selected core reported on dec_*: the issued petition and its
//    rule must match;
//  * every accepted petition is issued once (mirror empty at the end);
//  * no exploratory decision after epsilon is set to 0; about 10 % before;
//  * each mechanism occurs at least once: buffer full / re-sent petition,
//    each of the four arbitration rules, row hits and misses, greedy and
//    exploratory decisions, Q-learning updates, fair and unfair rewards,
//    a non-zero predicted reward (learned theta), more than 100 issues
//    (HistPet window full), the configuration write.
module tb_cads_top;
  import cads_pkg::*;
  localparam int NCORES = 16, NBUF = 64, NBANKS = 32;
  localparam int RUN_TICKS = 12000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic dram_tick, req_valid, req_accept, req_full, iss_valid, iss_hit;
  req_t req, iss_req;
  logic [1:0] iss_rule;
  logic [NBANKS-1:0] bank_ready;
  logic cfg_wr_en; logic [4:0] cfg_wr_addr; logic [15:0] cfg_wr_data;
  logic dec_done, dec_valid, dec_explore, rew_done, q_updated;
  logic [3:0] dec_core;
  fix_t dec_max_reward, rew_value;
  logic [6:0] buf_count;
  logic [15:0] starv_max;
  int hits, misses;

  cads_top dut (.*);
  dram_timing_model u_dram (.clk(clk), .rst_n(rst_n), .dram_tick(dram_tick), .iss_valid(iss_valid),
                            .iss_req(iss_req), .bank_ready(bank_ready), .hits(hits), .misses(misses));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (RUN_TICKS * 9 + 200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- cores ----------------
  bit   pend[NCORES];
  req_t pend_req[NCORES];
  int   last_row[NCORES];
  int   phase = 0;
  int   rr = 0, cur_core = -1;
  int   n_refused = 0, n_accepted = 0, n_full_cycles = 0;

  always @(negedge clk) if (rst_n) begin
    if (dram_tick) for (int k = 0; k < NCORES; k++) if (!pend[k]) begin
      bit heavy; int p;
      heavy = (k < 8);
      p = (phase == 3) ? 0 : heavy ? ((phase == 1) ? 0 : 50) : 5;
      if ($urandom_range(0, 99) < p) begin
        int row;
        row = (!heavy && $urandom_range(0, 9) != 0) ? last_row[k] : $urandom_range(0, 63);
        last_row[k] = row;
        pend[k] = 1;
        pend_req[k] = '{core: 8'(k), bank: 8'(heavy ? $urandom_range(0, NBANKS-1) : (k % 4) * 8 + (row % 2)),
                        row: 16'(row), wr: 1'($urandom_range(0, 3) == 0)};
      end
    end
    cur_core = -1;
    for (int i = 0; i < NCORES; i++) begin
      int k;
      k = (rr + i) % NCORES;
      if (pend[k] && cur_core < 0) cur_core = k;
    end
    req_valid = (cur_core >= 0);
    req = (cur_core >= 0) ? pend_req[cur_core] : '0;
    if (cur_core >= 0) rr = (cur_core + 1) % NCORES;
  end

  // ---------------- mirror and checks at each edge ----------------
  req_t mirror[$];
  bit open_v[NBANKS]; int open_r[NBANKS];
  bit sel_v = 0; int sel_c = 0;
  int rule_cnt[4];
  int n_issue = 0, n_dec = 0, n_explore = 0, n_greedy = 0, n_upd = 0;
  int n_explore_late = 0, n_dec_late = 0, n_fair = 0, n_unfair = 0, n_nonzero = 0;
  bit cfg_written = 0;

  always @(posedge clk) if (rst_n) begin
    if (req_full) n_full_cycles++;
    if (iss_valid) begin
      int c1, c2, c3, c4, e_idx, e_rule;
      c1 = -1; c2 = -1; c3 = -1; c4 = -1;
      for (int e = mirror.size()-1; e >= 0; e--) if (bank_ready[mirror[e].bank]) begin
        bit h, m;
        h = open_v[mirror[e].bank] && open_r[mirror[e].bank] == int'(mirror[e].row);
        m = sel_v && int'(mirror[e].core) == sel_c;
        if (h && m) c1 = e;
        if (h) c2 = e;
        if (m) c3 = e;
        c4 = e;
      end
      if (c1 >= 0) begin e_idx = c1; e_rule = 0; end
      else if (c2 >= 0) begin e_idx = c2; e_rule = 1; end
      else if (c3 >= 0) begin e_idx = c3; e_rule = 2; end
      else begin e_idx = c4; e_rule = 3; end
      check(e_idx >= 0, "issue with a ready petition");
      if (e_idx >= 0) begin
        check(iss_req == mirror[e_idx] && int'(iss_rule) == e_rule,
              $sformatf("issue core %0d bank %0d row %0d rule %0d, expected entry %0d rule %0d",
                        iss_req.core, iss_req.bank, iss_req.row, iss_rule, e_idx, e_rule));
        mirror.delete(e_idx);
      end
      rule_cnt[iss_rule]++;
      open_v[iss_req.bank] = 1; open_r[iss_req.bank] = int'(iss_req.row);
      n_issue++;
    end
    if (req_valid) begin
      if (req_accept) begin
        mirror.push_back(req);
        pend[cur_core] = 0;
        n_accepted++;
      end else n_refused++;
    end
    if (dec_done) begin
      n_dec++;
      sel_v = dec_valid; sel_c = int'(dec_core);
      if (dec_valid) begin
        if (dec_explore) n_explore++; else n_greedy++;
        if (dec_max_reward != 0) n_nonzero++;
        if (cfg_written) begin n_dec_late++; if (dec_explore) n_explore_late++; end
      end
    end
    if (rew_done) begin
      if (rew_value == 16'sd256) n_fair++; else n_unfair++;
    end
    if (q_updated) n_upd++;
    if (iss_valid || req_accept) check(int'(buf_count) == mirror.size() ||
                                       int'(buf_count) == mirror.size() - (req_accept ? 1 : 0) + (iss_valid ? 1 : 0),
                                       "buffer count");
  end

  initial begin
    cfg_wr_en = 0; cfg_wr_addr = 0; cfg_wr_data = 0; req_valid = 0; req = '0;
    foreach (pend[k]) begin pend[k] = 0; last_row[k] = k; end
    foreach (open_v[b]) open_v[b] = 0;
    foreach (rule_cnt[i]) rule_cnt[i] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    repeat (RUN_TICKS / 3) @(posedge dram_tick);
    phase = 1;
    repeat (RUN_TICKS / 3) @(posedge dram_tick);
    @(negedge clk);
    cfg_wr_en = 1; cfg_wr_addr = 5'd2; cfg_wr_data = 16'd0;    // epsilon = 0
    @(negedge clk);
    cfg_wr_en = 0;
    phase = 2;
    repeat (40) @(posedge clk);
    cfg_written = 1;
    repeat (RUN_TICKS / 3) @(posedge dram_tick);
    // stop new traffic and drain
    phase = 3;
    begin
      int guard = 0;
      while ((mirror.size() > 0 || req_valid) && guard < 20000) begin
        @(posedge dram_tick);
        guard++;
      end
    end
    repeat (20) @(posedge clk);
    $display("issued %0d accepted %0d refused %0d (full %0d clocks)", n_issue, n_accepted, n_refused, n_full_cycles);
    $display("rules %0d %0d %0d %0d; DRAM hits %0d misses %0d", rule_cnt[0], rule_cnt[1], rule_cnt[2], rule_cnt[3], hits, misses);
    $display("decisions %0d greedy %0d explore %0d; after eps=0: %0d decisions, %0d explore", n_dec, n_greedy, n_explore, n_dec_late, n_explore_late);
    $display("updates %0d; rewards fair %0d unfair %0d; nonzero predictions %0d", n_upd, n_fair, n_unfair, n_nonzero);
    check(n_refused > 0, "buffer full, petitions re-sent");
    foreach (rule_cnt[i]) check(rule_cnt[i] > 0, $sformatf("arbitration rule %0d used", i));
    check(hits > 0 && misses > 0, "row hits and misses");
    check(n_greedy > 0 && n_explore > 0, "greedy and exploratory decisions");
    check(n_explore_late == 0 && n_dec_late > 0, "no exploration after epsilon = 0");
    check((n_explore - n_explore_late) * 100 > (n_greedy + n_explore - n_dec_late) * 5 &&
          (n_explore - n_explore_late) * 100 < (n_greedy + n_explore - n_dec_late) * 16, "exploration rate near 10 percent");
    check(n_upd > 0, "Q-learning updates");
    check(n_fair > 0 && n_unfair > 0, "fair and unfair rewards");
    check(n_nonzero > 0, "learned non-zero predictions");
    check(n_issue > 100, "history window filled");
    check(n_issue == n_accepted, "every accepted petition issued once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
