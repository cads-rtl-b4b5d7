// tb_reward_calculator: models the stall-time counters (count DRAM ticks while
// a core has waiting petitions, clear when it has none) and, for each reward
// pass, the MRStarvation of every core, its class and the rule chosen by the
// highest and lowest class among active cores. Checks the counters every
// clock, the reward and the NCORES+3 clock latency of a pass.
module tb_reward_calculator;
  import cads_pkg::*;
  localparam int unsigned NCORES = 16, NW = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic dram_tick, start, busy, done;
  logic [NCORES-1:0][NW-1:0] num_pet;
  logic [3:0][15:0] thr;
  logic [15:0][W-1:0] rule_reward;
  fix_t reward;
  logic [NCORES-1:0][15:0] stall_time;
  logic [15:0] last_mrs_max;

  reward_calculator dut (.*);

  int stall_m[NCORES];
  int seen[16];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // stall-time model, updated at each edge from the values driven before it
  always @(posedge clk) begin
    if (!rst_n) foreach (stall_m[k]) stall_m[k] = 0;
    else for (int k = 0; k < NCORES; k++) begin
      if (num_pet[k] == 0) stall_m[k] = 0;
      else if (dram_tick && stall_m[k] < 65535) stall_m[k]++;
    end
  end

  initial begin
    dram_tick = 0; start = 0; num_pet = '0;
    thr[0] = 0; thr[1] = 16'd1 << 8; thr[2] = 16'd4 << 8; thr[3] = 16'd16 << 8;
    for (int i = 0; i < 16; i++) rule_reward[i] = 16'(16 * i + 3);
    foreach (seen[i]) seen[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int pass = 0; pass < 400; pass++) begin
      // a stretch of DRAM cycles with changing queues
      for (int c = 0; c < 40; c++) begin
        @(negedge clk);
        dram_tick = (c % (1 + pass % 5) == 0);
        if (pass % 2 == 1 && c == 0) num_pet = '0;   // few active cores
        if ($urandom_range(0, 3) == 0) begin
          int k;
          k = (pass % 2 == 1) ? (pass + $urandom_range(0, 1)) % NCORES : $urandom_range(0, NCORES-1);
          num_pet[k] = NW'($urandom_range((pass % 2 == 1) ? 1 : 0, (pass % 4 == 0) ? 1 : 8));
        end
        @(posedge clk); #1;
        for (int k = 0; k < NCORES; k++) check(int'(stall_time[k]) == stall_m[k], $sformatf("stall[%0d]", k));
      end
      // a reward pass with the queues held
      @(negedge clk);
      dram_tick = 0;
      begin
        int mx, mn, lat, e, mmax; bit any;
        any = 0; mx = 0; mn = 0; mmax = 0;
        for (int k = 0; k < NCORES; k++) if (num_pet[k] != 0) begin
          int m, l;
          m = (stall_m[k] * 256) / num_pet[k];
          if (m > 65535) m = 65535;
          l = (m >= thr[3]) ? 3 : (m >= thr[2]) ? 2 : (m >= thr[1]) ? 1 : 0;
          if (!any || l > mx) mx = l;
          if (!any || l < mn) mn = l;
          if (!any || m > mmax) mmax = m;
          any = 1;
        end
        e = any ? 16 * (4 * mx + mn) + 3 : 3;
        start = 1;
        @(negedge clk); start = 0; lat = 0;
        while (!done) begin @(negedge clk); lat++; end
        check(lat == NCORES + 3, $sformatf("latency %0d", lat));
        check(int'(reward) == e, $sformatf("reward %0d exp %0d (max %0d min %0d)", reward, e, mx, mn));
        check(int'(last_mrs_max) == mmax, "largest MRStarvation");
        seen[any ? 4 * mx + mn : 0]++;
      end
    end
    begin
      int kinds = 0;
      foreach (seen[i]) if (seen[i] > 0) kinds++;
      $display("distinct rules used: %0d", kinds);
      check(kinds >= 6, "several rules exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
