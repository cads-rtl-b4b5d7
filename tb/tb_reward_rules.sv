// tb_reward_rules: starvation classes against the thresholds (including values
// exactly on a threshold) and the rule lookup by (max class, min class).
module tb_reward_rules;
  import cads_pkg::*;
  int checks = 0, failures = 0;
  logic [15:0] mrs; logic [3:0][15:0] thr; logic [1:0] level, max_level, min_level;
  logic any_active; logic [15:0][W-1:0] rule_reward; fix_t reward;
  reward_rules dut (.*);
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  initial begin
    #100000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 16; i++) rule_reward[i] = 16'(1000 + 7 * i);
    for (int t = 0; t < 200; t++) begin
      int e;
      thr[0] = 16'($urandom_range(0, 100));
      thr[1] = thr[0] + 16'($urandom_range(1, 1000));
      thr[2] = thr[1] + 16'($urandom_range(1, 1000));
      thr[3] = thr[2] + 16'($urandom_range(1, 1000));
      for (int k = 0; k < 20; k++) begin
        mrs = (k < 4) ? thr[k] : (k < 8) ? thr[k-4] - 16'd1 : 16'($urandom_range(0, 4000));
        #1;
        e = (mrs >= thr[3]) ? 3 : (mrs >= thr[2]) ? 2 : (mrs >= thr[1]) ? 1 : 0;
        check(int'(level) == e, $sformatf("class of %0d = %0d exp %0d", mrs, level, e));
      end
    end
    for (int a = 0; a < 2; a++)
      for (int mx = 0; mx < 4; mx++)
        for (int mn = 0; mn < 4; mn++) begin
          any_active = 1'(a); max_level = 2'(mx); min_level = 2'(mn);
          #1;
          check(int'(reward) == (a ? 1000 + 7 * (4*mx+mn) : 1000), $sformatf("rule %0d %0d %0d", a, mx, mn));
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
