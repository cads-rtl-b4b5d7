// tb_cads_workloads: runs the scheduler at its default size on synthetic
// stand-ins for the evaluated experiment sets, on 4, 8 and 16 active cores,
// each under CADS (epsilon 0.1) and under plain FR-FCFS (epsilon written to
// 0xFFFF, so the FR-FCFS core is always taken).
// The programs:
//   a  intensive, a petition on 50 % of DRAM cycles, random rows
//   b  intensive, 40 %, half the petitions to the program's current row
//   c  light, 10 %, 80 % to the current row
//   d  light, 8 %, 90 % to the current row
// The sets: Intensive = {a, b}, Non-intensive = {c, d}, MN = {b, c},
// MMNN = {a, b, c, d}. Cores are dealt out to the set's programs in turn.
// Each run lasts RUN_TICKS DRAM cycles and then drains. Reported per run:
// petitions accepted, refusals (petitions sent again because the buffer was
// full) and the mean waiting time in the buffer, overall and for the light
// programs. Checked: every accepted petition is issued exactly once, the
// buffer count agrees with the testbench's own count, and all runs finish.
// The numbers are not those of the published evaluation, which used full
// benchmarks on a full-system simulator.
module tb_cads_workloads;
  import cads_pkg::*;
  localparam int NCORES = 16, NBANKS = 32;
  localparam int RUN_TICKS = 2500;
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
    repeat (24 * (RUN_TICKS + 3000) * 9) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // program table: rate (percent of DRAM cycles), locality (percent)
  int rate[4] = '{50, 40, 10, 8};
  int loc[4]  = '{0, 50, 80, 90};
  int prog_of[NCORES];
  int active = 0;
  bit traffic = 0;

  bit   pend[NCORES];
  req_t pend_req[NCORES];
  int   cur_row[NCORES];
  int   rr = 0, cur_core = -1;

  always @(negedge clk) if (rst_n) begin
    if (dram_tick && traffic) for (int k = 0; k < active; k++) if (!pend[k]) begin
      int p;
      p = prog_of[k];
      if ($urandom_range(0, 99) < rate[p]) begin
        if ($urandom_range(0, 99) >= loc[p]) cur_row[k] = $urandom_range(0, 255);
        pend[k] = 1;
        pend_req[k] = '{core: 8'(k), bank: 8'((k * 7 + (cur_row[k] % 4) + ((p < 2) ? $urandom_range(0, 31) : 0)) % NBANKS),
                        row: 16'(cur_row[k]), wr: 1'($urandom_range(0, 3) == 0)};
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

  // bookkeeping: arrival clock of every buffered petition, kept in buffer order
  longint now = 0;
  req_t   mq[$];
  longint mt[$];
  longint wait_sum, wait_light; int n_acc, n_iss, n_ref, n_light;

  always @(posedge clk) begin
    now++;
    if (rst_n) begin
      if (iss_valid) begin
        int found;
        found = -1;
        for (int e = 0; e < mq.size(); e++) if (found < 0 && mq[e] == iss_req) found = e;
        check(found >= 0, "issued petition was in the buffer");
        if (found >= 0) begin
          wait_sum += now - mt[found];
          if (prog_of[iss_req.core] >= 2) begin wait_light += now - mt[found]; n_light++; end
          mq.delete(found); mt.delete(found);
        end
        n_iss++;
      end
      if (req_valid) begin
        if (req_accept) begin mq.push_back(req); mt.push_back(now); pend[cur_core] = 0; n_acc++; end
        else n_ref++;
      end
    end
  end

  task automatic run(input string name, input int ncores, input int progs[], input bit frfcfs);
    real ref_per_acc;
    // reset and configure
    @(negedge clk);
    rst_n = 0; traffic = 0;
    foreach (pend[k]) pend[k] = 0;
    mq.delete(); mt.delete();
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait_sum = 0; wait_light = 0; n_acc = 0; n_iss = 0; n_ref = 0; n_light = 0;
    active = ncores;
    for (int k = 0; k < NCORES; k++) begin prog_of[k] = progs[k % progs.size()]; cur_row[k] = k; end
    if (frfcfs) begin
      cfg_wr_en = 1; cfg_wr_addr = 5'd2; cfg_wr_data = 16'hFFFF;
      @(negedge clk);
      cfg_wr_en = 0;
    end
    traffic = 1;
    repeat (RUN_TICKS) @(posedge dram_tick);
    traffic = 0;
    begin
      int guard = 0;
      while ((mq.size() > 0 || req_valid) && guard < 3000) begin @(posedge dram_tick); guard++; end
    end
    repeat (4) @(posedge clk);
    check(n_iss == n_acc && mq.size() == 0, $sformatf("%s: all %0d accepted petitions issued (%0d)", name, n_acc, n_iss));
    check(int'(buf_count) == 0, "buffer empty after drain");
    ref_per_acc = (n_acc > 0) ? real'(n_ref) / real'(n_acc) : 0.0;
    $display("%-14s %2d cores %-7s accepted %6d  refusals/petition %7.2f  mean wait %7.1f clk  light-program wait %7.1f clk",
             name, ncores, frfcfs ? "FR-FCFS" : "CADS", n_acc, ref_per_acc,
             (n_iss > 0) ? real'(wait_sum) / real'(n_iss) : 0.0,
             (n_light > 0) ? real'(wait_light) / real'(n_light) : 0.0);
  endtask

  initial begin
    int s_int[] = '{0, 1};
    int s_non[] = '{2, 3};
    int s_mn[]  = '{1, 2};
    int s_mmnn[] = '{0, 1, 2, 3};
    int counts[3] = '{4, 8, 16};
    cfg_wr_en = 0; cfg_wr_addr = 0; cfg_wr_data = 0; req_valid = 0; req = '0;
    foreach (counts[i]) begin
      for (int pol = 0; pol < 2; pol++) begin
        run("Intensive",     counts[i], s_int,  pol == 1);
        run("Non-intensive", counts[i], s_non,  pol == 1);
        run("MN",            counts[i], s_mn,   pol == 1);
        run("MMNN",          counts[i], s_mmnn, pol == 1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
