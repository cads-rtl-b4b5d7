// tb_request_buffer: random enqueue/release traffic against a queue model, at
// the default 64 entries, alternating filling and draining phases.
// Every clock it compares count, full and every valid entry (oldest first)
// with a SystemVerilog queue that applies the same release-then-append rule,
// and checks that a petition is visible one clock after it is accepted.
module tb_request_buffer;
  import cads_pkg::*;
  localparam int unsigned NBUF = 64;   // the default size
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic enq_valid, full, enq_accept, deq_valid;
  req_t enq_req;
  logic [$clog2(NBUF)-1:0] deq_idx;
  logic [NBUF-1:0] ent_valid;
  req_t [NBUF-1:0] ent_req;
  logic [$clog2(NBUF):0] count;

  request_buffer dut (.*);

  req_t model[$];
  int   n_full = 0, n_refused = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    enq_valid = 0; deq_valid = 0; enq_req = '0; deq_idx = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 6000; cyc++) begin
      // drive (phase 1: mostly fill, phase 2: mostly drain, then mixed)
      @(negedge clk);
      enq_valid = ($urandom_range(0, 99) < ((cyc % 600) < 300 ? 80 : 30));
      enq_req   = '{core: 8'($urandom_range(0,15)), bank: 8'($urandom_range(0,31)),
                    row: 16'($urandom), wr: 1'($urandom)};
      deq_valid = (model.size() > 0) && ($urandom_range(0, 99) < ((cyc % 600) < 300 ? 30 : 80));
      deq_idx   = deq_valid ? $clog2(NBUF)'($urandom_range(0, model.size()-1)) : '0;
      #1;
      check(full == (model.size() == NBUF), "full flag");
      check(enq_accept == (enq_valid && model.size() < NBUF), "enq_accept");
      if (full) n_full++;
      if (enq_valid && full) n_refused++;
      @(posedge clk);
      if (deq_valid) model.delete(int'(deq_idx));
      if (enq_valid && enq_accept) model.push_back(enq_req);
      #1;
      check(int'(count) == model.size(), "count");
      for (int i = 0; i < NBUF; i++) begin
        if (i < model.size()) check(ent_valid[i] && ent_req[i] == model[i], $sformatf("entry %0d", i));
        else                  check(!ent_valid[i], $sformatf("entry %0d empty", i));
      end
    end
    $display("clocks full %0d, refused %0d", n_full, n_refused);
    check(n_full > 0 && n_refused > 0, "buffer filled and refused petitions");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
