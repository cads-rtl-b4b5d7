// tb_feature_counters: drives petitions into and out of a modelled buffer and
// recomputes all four features from scratch each clock: NumPet and RowHitPet
// per core (against the last row each core was served), BPPet (banks with a
// waiting petition) and HistPet (core ids among the last HIST_LEN issued).
// The counters must match one clock after each event. Runs at the default
// 16 cores / 64 entries / 32 banks / 100-deep history with few banks and rows
// in use so that row hits and full histories occur.
module tb_feature_counters;
  import cads_pkg::*;
  localparam int unsigned NCORES = 16, NBUF = 64, NBANKS = 32, HIST_LEN = 100;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic enq_valid, deq_valid;
  req_t enq_req, deq_req;
  logic [NBUF-1:0] ent_valid;
  req_t [NBUF-1:0] ent_req;
  feat_t [NCORES-1:0][NFEAT-1:0] feat;

  feature_counters dut (.*);

  req_t buf_q[$];
  int   hist[$];
  int   last_bank[NCORES], last_row[NCORES];
  bit   last_ok[NCORES];
  int   max_rowhit = 0, max_bp = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_comb begin
    for (int i = 0; i < NBUF; i++) begin
      ent_valid[i] = (i < buf_q.size());
      ent_req[i]   = (i < buf_q.size()) ? buf_q[i] : '0;
    end
  end

  initial begin
    enq_valid = 0; deq_valid = 0; enq_req = '0; deq_req = '0;
    foreach (last_ok[k]) last_ok[k] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      int di;
      @(negedge clk);
      enq_valid = (buf_q.size() < NBUF) && ($urandom_range(0, 99) < 55);
      enq_req   = '{core: 8'($urandom_range(0, NCORES-1)), bank: 8'($urandom_range(0, 11)),
                    row: 16'($urandom_range(0, 2)), wr: 1'b0};
      deq_valid = (buf_q.size() > 0) && ($urandom_range(0, 99) < 50);
      di        = deq_valid ? $urandom_range(0, buf_q.size()-1) : 0;
      deq_req   = deq_valid ? buf_q[di] : '0;
      @(posedge clk);
      #1;
      // the DUT samples the buffer of this clock for RowHitPet: expected
      // row-hit counts use the buffer and last rows before this edge
      begin
        int exp_rh[NCORES];
        foreach (exp_rh[k]) exp_rh[k] = 0;
        foreach (buf_q[i]) begin
          int c; c = buf_q[i].core;
          if (last_ok[c] && last_bank[c] == buf_q[i].bank && last_row[c] == buf_q[i].row) exp_rh[c]++;
        end
        if (deq_valid) begin
          buf_q.delete(di);
          last_ok[deq_req.core] = 1; last_bank[deq_req.core] = deq_req.bank; last_row[deq_req.core] = deq_req.row;
          hist.push_front(deq_req.core);
          if (hist.size() > HIST_LEN) void'(hist.pop_back());
        end
        if (enq_valid) buf_q.push_back(enq_req);
        begin
          int exp_num[NCORES], exp_hist[NCORES];
          bit used[NBANKS];
          int exp_bp;
          foreach (exp_num[k]) begin exp_num[k] = 0; exp_hist[k] = 0; end
          foreach (used[b]) used[b] = 0;
          foreach (buf_q[i]) begin exp_num[buf_q[i].core]++; used[buf_q[i].bank] = 1; end
          foreach (hist[i]) exp_hist[hist[i]]++;
          exp_bp = 0;
          foreach (used[b]) exp_bp += used[b];
          if (exp_bp > max_bp) max_bp = exp_bp;
          for (int k = 0; k < NCORES; k++) begin
            check(int'(feat[k][F_NUMPET]) == exp_num[k],  $sformatf("NumPet[%0d]=%0d exp %0d", k, feat[k][F_NUMPET], exp_num[k]));
            check(int'(feat[k][F_ROWHIT]) == exp_rh[k],   $sformatf("RowHitPet[%0d]=%0d exp %0d", k, feat[k][F_ROWHIT], exp_rh[k]));
            check(int'(feat[k][F_HIST])   == exp_hist[k], $sformatf("HistPet[%0d]=%0d exp %0d", k, feat[k][F_HIST], exp_hist[k]));
            check(int'(feat[k][F_BPPET])  == exp_bp,      $sformatf("BPPet=%0d exp %0d", feat[k][F_BPPET], exp_bp));
            if (exp_rh[k] > max_rowhit) max_rowhit = exp_rh[k];
          end
        end
      end
    end
    check(max_rowhit > 0, "row hits occurred");
    check(hist.size() == HIST_LEN, "history filled");
    $display("max RowHitPet %0d, max BPPet %0d", max_rowhit, max_bp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
