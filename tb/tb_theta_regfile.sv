// tb_theta_regfile: checks that all parameters reset to zero and that random
// single writes land in exactly one register, one clock later.
module tb_theta_regfile;
  import cads_pkg::*;
  localparam int unsigned NCORES = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we; logic [3:0] wcore; logic [1:0] widx; fix_t wdata;
  fix_t [NCORES-1:0][NFEAT-1:0] theta, model;
  theta_regfile dut (.*);
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
    we = 0; wcore = 0; widx = 0; wdata = 0;
    repeat (2) @(posedge clk); #1;
    model = '0;
    check(theta == model, "reset to zero");
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      we = 1'($urandom); wcore = 4'($urandom); widx = 2'($urandom); wdata = fix_t'($urandom);
      @(posedge clk); #1;
      if (we) model[wcore][widx] = wdata;
      check(theta == model, $sformatf("contents after write %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
