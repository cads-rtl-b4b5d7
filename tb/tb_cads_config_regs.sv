// tb_cads_config_regs: checks the reset values (alpha 0.15, gamma 0.9 and
// epsilon 0.1 in their fixed-point codes, thresholds, the 16 rule rewards)
// and that each register address writes only its own field.
module tb_cads_config_regs;
  import cads_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en; logic [4:0] wr_addr; logic [15:0] wr_data;
  cfg_t cfg, model;
  cads_config_regs dut (.*);
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    wr_en = 0; wr_addr = 0; wr_data = 0;
    repeat (2) @(posedge clk); #1;
    check(cfg.alpha == 16'sd38,  "alpha = round(0.15*256)");
    check(cfg.gamma == 16'sd230, "gamma = round(0.9*256)");
    check(cfg.epsilon == 16'd6554, "epsilon = round(0.1*65536)");
    check(cfg.thr[0] == 16'd0 && cfg.thr[1] == 16'd1024 && cfg.thr[2] == 16'd4096 && cfg.thr[3] == 16'd16384, "thresholds");
    for (int mx = 0; mx < 4; mx++)
      for (int mn = 0; mn < 4; mn++) begin
        int d; logic [15:0] e;
        d = (mx > mn) ? mx - mn : 0;
        e = (d == 0) ? 16'd256 : (d == 1) ? 16'd128 : (d == 2) ? 16'd64 : 16'd0;
        check(cfg.rule_reward[4*mx+mn] == e, $sformatf("rule %0d %0d", mx, mn));
      end
    rst_n = 1;
    model = cfg;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      wr_en = 1'($urandom); wr_addr = 5'($urandom); wr_data = 16'($urandom);
      @(posedge clk); #1;
      if (wr_en) begin
        if (wr_addr == 0) model.alpha = fix_t'(wr_data);
        else if (wr_addr == 1) model.gamma = fix_t'(wr_data);
        else if (wr_addr == 2) model.epsilon = wr_data;
        else if (wr_addr >= 4 && wr_addr < 8) model.thr[wr_addr-4] = wr_data;
        else if (wr_addr >= 16) model.rule_reward[wr_addr-16] = wr_data;
      end
      check(cfg == model, $sformatf("write %0d addr %0d", i, wr_addr));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
