// dram_timing_model: behavioural stand-in for the DRAM command side (not
// synthesizable logic of the scheduler; used by the end-to-end testbench).
// A bank is busy for HIT_CYC DRAM cycles after a petition that hits its open
// row and for MISS_CYC DRAM cycles after one that must precharge and activate
// a row; bank_ready is high when it is idle. Defaults correspond to the DDR3
// timings of the evaluated system at an 800 MHz command clock: tCAS = tRCD =
// tRP = 12 ns (10 cycles each) plus a burst of 8 (4 cycles), so 14 cycles for
// a hit and 34 for a row conflict. It keeps its own open-row table.
module dram_timing_model
  import cads_pkg::*;
#(
  parameter int NBANKS   = 32,
  parameter int HIT_CYC  = 14,
  parameter int MISS_CYC = 34
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              dram_tick,
  input  logic              iss_valid,
  input  req_t              iss_req,
  output logic [NBANKS-1:0] bank_ready,
  output int                hits,
  output int                misses
);
  int  busy[NBANKS];
  bit  open_v[NBANKS];
  int  open_r[NBANKS];

  always_comb for (int b = 0; b < NBANKS; b++) bank_ready[b] = (busy[b] == 0);

  always @(posedge clk) begin
    if (!rst_n) begin
      for (int b = 0; b < NBANKS; b++) begin busy[b] = 0; open_v[b] = 0; open_r[b] = 0; end
      hits = 0; misses = 0;
    end else begin
      if (dram_tick) for (int b = 0; b < NBANKS; b++) if (busy[b] > 0) busy[b]--;
      if (iss_valid) begin
        int b;
        b = int'(iss_req.bank);
        if (open_v[b] && open_r[b] == int'(iss_req.row)) begin busy[b] = HIT_CYC; hits++; end
        else begin busy[b] = MISS_CYC; misses++; end
        open_v[b] = 1; open_r[b] = int'(iss_req.row);
      end
    end
  end
endmodule
