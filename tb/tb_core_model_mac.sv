// tb_core_model_mac: random theta and features, including values that
// saturate; the expected reward is computed with integer arithmetic
// (sum of theta*f, clamped to the 16-bit range) and must appear one clock
// after the inputs, with its core tag.
module tb_core_model_mac;
  import cads_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, out_valid; logic [3:0] in_core, out_core;
  fix_t [NFEAT-1:0] theta; feat_t [NFEAT-1:0] feat; fix_t out_reward;
  core_model_mac dut (.*);
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int nsat = 0;
    in_valid = 0; in_core = 0; theta = '0; feat = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      longint exp;
      @(negedge clk);
      in_valid = 1'($urandom); in_core = 4'($urandom);
      for (int j = 0; j < NFEAT; j++) begin
        theta[j] = (i % 3 == 0) ? fix_t'($urandom) : fix_t'($signed(16'($urandom_range(0, 1023))) - 16'sd512);
        feat[j]  = feat_t'($urandom_range(0, 100));
      end
      exp = 0;
      for (int j = 0; j < NFEAT; j++) exp += longint'(theta[j]) * longint'(feat[j]);
      if (exp > 32767) begin exp = 32767; nsat++; end
      if (exp < -32768) begin exp = -32768; nsat++; end
      @(posedge clk); #1;
      check(out_valid == in_valid && out_core == in_core, "valid/tag after one clock");
      check(longint'(out_reward) == exp, $sformatf("reward %0d exp %0d", out_reward, exp));
    end
    check(nsat > 0, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
