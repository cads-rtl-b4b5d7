// feature_counters: the environment state of the CADS learner.
//
// Produces, for every core k, the four features of equation (1):
//   f0 NumPet[k]    petitions of core k waiting in the request buffer
//   f1 RowHitPet[k] waiting petitions of core k that hit the row core k
//                   accessed last (one "last accessed row" register per core)
//   f2 BPPet        global: number of banks that have at least one waiting
//                   petition, i.e. petitions that could proceed in parallel
//   f3 HistPet[k]   petitions of core k among the last HIST_LEN (100) issued
// NumPet, BPPet and HistPet are synchronous up/down counters stepped when a
// petition enters (enq) or leaves (deq) the buffer, as in the original work.
// BPPet is kept with one occupancy counter per bank and counts the banks whose
// occupancy goes 0->1 or 1->0. HistPet uses a shift register of the core ids of
// the last HIST_LEN issued petitions; the id that falls out is subtracted.
// RowHitPet cannot be kept as a pure up/down counter, because the reference row
// of core k changes whenever core k is served; here it is a registered count
// over the buffer entries (this design's choice).
//
// Each feature is delivered 16 bits wide to match the model multipliers; the
// counters themselves are 6-7 bits, so the upper bits are always zero.
//
// Timing: all outputs are registered and reflect the buffer one clock after an
// enq/deq (RowHitPet one clock after the buffer contents). Synchronous
// active-low reset clears all counters and the history.
module feature_counters
  import cads_pkg::*;
#(
  parameter int unsigned NCORES   = NCORES_D,
  parameter int unsigned NBUF     = NBUF_D,
  parameter int unsigned NBANKS   = NBANKS_D,
  parameter int unsigned HIST_LEN = HIST_LEN_D
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   enq_valid,   // petition accepted into buffer
  input  req_t                   enq_req,
  input  logic                   deq_valid,   // petition issued, leaves buffer
  input  req_t                   deq_req,
  input  logic [NBUF-1:0]        ent_valid,
  input  req_t [NBUF-1:0]        ent_req,
  output feat_t [NCORES-1:0][NFEAT-1:0] feat
);
  localparam int unsigned CW = $clog2(NCORES);
  localparam int unsigned BW = $clog2(NBANKS);
  localparam int unsigned NW = $clog2(NBUF) + 1;       // 0..NBUF
  localparam int unsigned HW = $clog2(HIST_LEN + 1);   // 0..HIST_LEN
  localparam int unsigned PW = $clog2(NBANKS + 1);     // 0..NBANKS

  logic [NCORES-1:0][NW-1:0] num_pet, rowhit_pet;
  logic [NCORES-1:0][HW-1:0] hist_pet;
  logic [NBANKS-1:0][NW-1:0] bank_occ;
  logic [PW-1:0]             bp_pet;
  logic [NCORES-1:0][BW+ROW_W-1:0] last_row;
  logic [NCORES-1:0]         last_vld;
  logic [HIST_LEN-1:0][CW-1:0] hist_id;
  logic [HIST_LEN-1:0]       hist_vld;

  logic [CW-1:0] ecore, dcore;
  logic [BW-1:0] ebank, dbank;
  assign ecore = enq_req.core[CW-1:0];
  assign dcore = deq_req.core[CW-1:0];
  assign ebank = enq_req.bank[BW-1:0];
  assign dbank = deq_req.bank[BW-1:0];

  // number of banks changing between empty and non-empty
  logic bp_up, bp_dn;
  always_comb begin
    bp_up = 1'b0;
    bp_dn = 1'b0;
    if (enq_valid && !(deq_valid && dbank == ebank) && bank_occ[ebank] == '0) bp_up = 1'b1;
    if (deq_valid && !(enq_valid && dbank == ebank) && bank_occ[dbank] == NW'(1)) bp_dn = 1'b1;
  end

  // row-hit count over the buffer
  logic [NCORES-1:0][NW-1:0] rowhit_next;
  always_comb begin
    rowhit_next = '0;
    for (int e = 0; e < NBUF; e++) begin
      logic [CW-1:0] c;
      c = ent_req[e].core[CW-1:0];
      if (ent_valid[e] && last_vld[c] &&
          last_row[c] == {ent_req[e].bank[BW-1:0], ent_req[e].row})
        rowhit_next[c] = rowhit_next[c] + NW'(1);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      num_pet    <= '0;
      rowhit_pet <= '0;
      hist_pet   <= '0;
      bank_occ   <= '0;
      bp_pet     <= '0;
      last_row   <= '0;
      last_vld   <= '0;
      hist_id    <= '0;
      hist_vld   <= '0;
    end else begin
      for (int k = 0; k < NCORES; k++) begin
        num_pet[k] <= num_pet[k] + ((enq_valid && ecore == CW'(k)) ? NW'(1) : NW'(0))
                                 - ((deq_valid && dcore == CW'(k)) ? NW'(1) : NW'(0));
        hist_pet[k] <= hist_pet[k]
          + ((deq_valid && dcore == CW'(k)) ? HW'(1) : HW'(0))
          - ((deq_valid && hist_vld[HIST_LEN-1] && hist_id[HIST_LEN-1] == CW'(k)) ? HW'(1) : HW'(0));
      end
      for (int b = 0; b < NBANKS; b++) begin
        bank_occ[b] <= bank_occ[b] + ((enq_valid && ebank == BW'(b)) ? NW'(1) : NW'(0))
                                   - ((deq_valid && dbank == BW'(b)) ? NW'(1) : NW'(0));
      end
      bp_pet <= bp_pet + (bp_up ? PW'(1) : PW'(0)) - (bp_dn ? PW'(1) : PW'(0));
      rowhit_pet <= rowhit_next;
      if (deq_valid) begin
        last_row[dcore] <= {dbank, deq_req.row};
        last_vld[dcore] <= 1'b1;
        hist_id  <= {hist_id[HIST_LEN-2:0], dcore};
        hist_vld <= {hist_vld[HIST_LEN-2:0], 1'b1};
      end
    end
  end

  always_comb begin
    for (int k = 0; k < NCORES; k++) begin
      feat[k][F_NUMPET] = feat_t'(num_pet[k]);
      feat[k][F_ROWHIT] = feat_t'(rowhit_pet[k]);
      feat[k][F_BPPET]  = feat_t'(bp_pet);
      feat[k][F_HIST]   = feat_t'(hist_pet[k]);
    end
  end

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
    deq_valid |-> (num_pet[dcore] != '0 || (enq_valid && ecore == dcore)));

endmodule
