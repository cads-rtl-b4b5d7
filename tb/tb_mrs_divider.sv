// tb_mrs_divider: MRStarvation = stall/num in Q8.8 (floor(stall*256/num),
// clamped to 0xFFFF, zero when num is zero), checked for random and corner
// operands one clock after the inputs.
module tb_mrs_divider;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, out_valid; logic [3:0] in_tag, out_tag;
  logic [15:0] stall, mrs; logic [6:0] num;
  mrs_divider dut (.*);
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
    in_valid = 0; in_tag = 0; stall = 0; num = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      longint exp;
      @(negedge clk);
      in_valid = 1; in_tag = 4'(i);
      stall = (i < 10) ? 16'hFFFF : 16'($urandom_range(0, (i % 2) ? 65535 : 400));
      num   = (i < 5) ? 7'd1 : (i % 50 == 0) ? 7'd0 : 7'($urandom_range(1, 64));
      exp = (num == 0) ? 0 : (longint'(stall) * 256) / longint'(num);
      if (exp > 65535) exp = 65535;
      @(posedge clk); #1;
      check(out_valid && out_tag == in_tag, "tag after one clock");
      check(longint'(mrs) == exp, $sformatf("%0d/%0d -> %0d exp %0d", stall, num, mrs, exp));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
