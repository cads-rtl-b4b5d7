// tb_qlearn_update: a sequence of decisions with random rewards, features and
// parameters. The testbench holds the theta array itself, applies the unit's
// writes to it, and recomputes each expected update with integer arithmetic:
//   g = floor(gamma*max/256), d = cur + g - prev, ad = floor(alpha*d/256),
//   theta_i += ad * f_i       (each step clamped to 16 bits)
// for the core chosen by the previous decision, with that decision's features.
// Also checks that the first decision and decisions without a selection make
// no write, that exactly four writes happen per update, and the 9-clock
// latency.
module tb_qlearn_update;
  import cads_pkg::*;
  localparam int unsigned NCORES = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, sel_valid, th_we, done, updated;
  fix_t alpha, gamma, cur_reward, max_reward, sel_reward, th_data;
  logic [3:0] sel_core, th_core; logic [1:0] th_idx;
  feat_t [NFEAT-1:0] sel_feat;
  fix_t [NCORES-1:0][NFEAT-1:0] theta;

  qlearn_update dut (.*);

  function automatic longint clamp(longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : v;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int writes;
  always @(posedge clk) if (rst_n && th_we) begin
    theta[th_core][th_idx] <= th_data;
    writes++;
  end

  initial begin
    bit pv; int pc; longint pr; longint pf[NFEAT];
    int nupd = 0;
    start = 0; sel_valid = 0; alpha = 16'sd38; gamma = 16'sd230;
    cur_reward = 0; max_reward = 0; sel_reward = 0; sel_core = 0; sel_feat = '0;
    for (int k = 0; k < NCORES; k++) for (int j = 0; j < NFEAT; j++) theta[k][j] = fix_t'($urandom_range(0, 200)) - 16'sd100;
    pv = 0; pc = 0; pr = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 1500; n++) begin
      fix_t exp_th[NFEAT]; int lat; bit do_upd;
      @(negedge clk);
      if (n % 100 == 50) begin alpha = fix_t'($urandom_range(1, 256)); gamma = fix_t'($urandom_range(0, 256)); end
      sel_valid  = (n % 10 != 7);
      cur_reward = fix_t'($urandom_range(0, 256));
      max_reward = (n % 17 == 3) ? fix_t'($urandom) : fix_t'($urandom_range(0, 2000)) - 16'sd1000;
      sel_core   = 4'($urandom);
      sel_reward = (n % 13 == 5) ? -16'sd32768 : fix_t'($urandom_range(0, 2000)) - 16'sd1000;
      for (int j = 0; j < NFEAT; j++) sel_feat[j] = feat_t'($urandom_range(0, 100));
      do_upd = sel_valid && pv;
      if (do_upd) begin
        longint g, d, ad;
        g  = clamp((longint'(gamma) * longint'(max_reward)) >>> 8);
        d  = clamp(longint'(cur_reward) + g);
        d  = clamp(d + ((pr == -32768) ? 32767 : -pr));
        ad = clamp((longint'(alpha) * d) >>> 8);
        for (int j = 0; j < NFEAT; j++) exp_th[j] = fix_t'(clamp(longint'(theta[pc][j]) + clamp(ad * pf[j])));
      end
      writes = 0;
      start = 1;
      @(negedge clk); start = 0; lat = 0;
      while (!done) begin @(negedge clk); lat++; end
      check(lat == (do_upd ? 9 : sel_valid ? 1 : 0), $sformatf("latency %0d", lat));
      check(updated == do_upd, "updated flag");
      check(writes == (do_upd ? 4 : 0), $sformatf("write count %0d", writes));
      if (do_upd) begin
        nupd++;
        for (int j = 0; j < NFEAT; j++) check(theta[pc][j] == exp_th[j], $sformatf("theta[%0d][%0d]=%0d exp %0d", pc, j, theta[pc][j], exp_th[j]));
      end
      if (sel_valid) begin
        pv = 1; pc = sel_core; pr = sel_reward;
        for (int j = 0; j < NFEAT; j++) pf[j] = sel_feat[j];
      end
    end
    check(nupd > 1000, "updates happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
