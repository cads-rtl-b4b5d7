// request_arbiter: picks the petition to issue (reorder_request_banks).
//
// A petition is ready when its bank can take a command now (bank_ready, from
// the DRAM command side, which owns the timing constraints). It is a row hit
// when its row is the open row of its bank; the arbiter keeps the open row of
// every bank itself (open-page policy: the row of the last petition issued to
// a bank stays open). With the core chosen by CADS (sel_core), the order is
//   1. the oldest ready row hit of the selected core,
//   2. else the oldest ready row hit of any core (lower latency),
//   3. else the oldest ready petition of the selected core,
//   4. else the oldest ready petition.
// Rules 1-2 are those of the original work; rules 3-4 keep the FR-FCFS
// baseline when the selected core has no row hit. Without a valid selection
// (sel_valid low) the order is plain FR-FCFS (2 then 4). The FR-FCFS choice
// and the set of cores with a ready petition are also output: the next-core
// circuit needs both. The buffer holds entries oldest first, so "oldest" is
// the lowest index.
//
// Timing: the choice is combinational from the buffer and bank_ready; issue
// commits it at the rising edge (the open-row table is updated). Synchronous
// active-low reset closes all rows.
module request_arbiter
  import cads_pkg::*;
#(
  parameter int unsigned NCORES = NCORES_D,
  parameter int unsigned NBUF   = NBUF_D,
  parameter int unsigned NBANKS = NBANKS_D
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [NBUF-1:0]            ent_valid,
  input  req_t [NBUF-1:0]            ent_req,
  input  logic [NBANKS-1:0]          bank_ready,
  input  logic                       sel_valid,
  input  logic [$clog2(NCORES)-1:0]  sel_core,
  input  logic                       issue,
  output logic                       gnt_valid,
  output logic [$clog2(NBUF)-1:0]    gnt_idx,
  output req_t                       gnt_req,
  output logic [1:0]                 gnt_rule,    // which of the four rules chose it (0..3)
  output logic                       gnt_hit,
  output logic [$clog2(NCORES)-1:0]  frfcfs_core,
  output logic [NCORES-1:0]          core_ready
);
  localparam int unsigned CW = $clog2(NCORES);
  localparam int unsigned BW = $clog2(NBANKS);
  localparam int unsigned IW = $clog2(NBUF);

  logic [NBANKS-1:0]            open_vld;
  logic [NBANKS-1:0][ROW_W-1:0] open_row;

  logic [NBUF-1:0] rdy, hit, mine;
  always_comb begin
    core_ready = '0;
    for (int e = 0; e < NBUF; e++) begin
      logic [BW-1:0] b;
      b       = ent_req[e].bank[BW-1:0];
      rdy[e]  = ent_valid[e] && bank_ready[b];
      hit[e]  = rdy[e] && open_vld[b] && open_row[b] == ent_req[e].row;
      mine[e] = sel_valid && ent_req[e].core[CW-1:0] == sel_core;
      if (rdy[e]) core_ready[ent_req[e].core[CW-1:0]] = 1'b1;
    end
  end

  // oldest (lowest index) set bit of each candidate vector
  logic          f1, f2, f3, f4;
  logic [IW-1:0] i1, i2, i3, i4;
  always_comb begin
    f1 = 1'b0; f2 = 1'b0; f3 = 1'b0; f4 = 1'b0;
    i1 = '0;   i2 = '0;   i3 = '0;   i4 = '0;
    for (int e = NBUF-1; e >= 0; e--) begin
      if (hit[e] && mine[e]) begin f1 = 1'b1; i1 = IW'(e); end
      if (hit[e])            begin f2 = 1'b1; i2 = IW'(e); end
      if (rdy[e] && mine[e]) begin f3 = 1'b1; i3 = IW'(e); end
      if (rdy[e])            begin f4 = 1'b1; i4 = IW'(e); end
    end
  end

  always_comb begin
    gnt_valid = f4;
    if      (f1) begin gnt_idx = i1; gnt_rule = 2'd0; end
    else if (f2) begin gnt_idx = i2; gnt_rule = 2'd1; end
    else if (f3) begin gnt_idx = i3; gnt_rule = 2'd2; end
    else         begin gnt_idx = i4; gnt_rule = 2'd3; end
    gnt_req     = ent_req[gnt_idx];
    gnt_hit     = hit[gnt_idx];
    frfcfs_core = ent_req[f2 ? i2 : i4].core[CW-1:0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      open_vld <= '0;
      open_row <= '0;
    end else if (issue && gnt_valid) begin
      open_vld[gnt_req.bank[BW-1:0]] <= 1'b1;
      open_row[gnt_req.bank[BW-1:0]] <= gnt_req.row;
    end
  end
endmodule
