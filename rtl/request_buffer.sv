// request_buffer: the memory controller's buffer of waiting petitions.
//
// Holds up to NBUF petitions (core, bank, row, read/write) in arrival order:
// entry 0 is always the oldest. It is a collapsing queue: when an entry is
// released, every younger entry moves down by one in the same clock, so "oldest
// first" in the arbiter is a plain priority encoder from index 0. A new
// petition is written behind the last valid entry. When the buffer is full a
// new petition is refused (full is high, enq_valid is ignored) and the core
// has to send it again, which is how the original work counts extra requests.
// One enqueue and one release may happen in the same clock; a release frees a
// slot for an enqueue in that clock only if the buffer was not full.
//
// Timing: enq and deq take effect at the rising clock edge; outputs are
// registered. Reset is synchronous and active low (rst_n) and empties the buffer. The buffer size (64) is the paper's;
// the collapsing organisation is a choice of this implementation.
module request_buffer
  import cads_pkg::*;
#(
  parameter int unsigned NBUF = NBUF_D
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    enq_valid,
  input  req_t                    enq_req,
  output logic                    full,
  output logic                    enq_accept,
  input  logic                    deq_valid,
  input  logic [$clog2(NBUF)-1:0] deq_idx,
  output logic [NBUF-1:0]         ent_valid,
  output req_t [NBUF-1:0]         ent_req,
  output logic [$clog2(NBUF):0]   count
);

  req_t [NBUF-1:0] q;
  logic [$clog2(NBUF):0] cnt;

  assign full       = (cnt == ($clog2(NBUF)+1)'(NBUF));
  assign enq_accept = enq_valid && !full;
  assign ent_req    = q;
  assign count      = cnt;

  always_comb begin
    for (int i = 0; i < NBUF; i++) ent_valid[i] = (i < cnt);
  end

  logic do_deq;
  assign do_deq = deq_valid && (32'(deq_idx) < 32'(cnt));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt <= '0;
      q   <= '0;
    end else begin
      for (int i = 0; i < NBUF; i++) begin
        if (do_deq && i >= int'(deq_idx) && i < NBUF-1) q[i] <= q[i+1];
      end
      if (enq_accept) q[do_deq ? cnt-1 : cnt] <= enq_req;
      cnt <= cnt + (enq_accept ? 1 : 0) - (do_deq ? 1 : 0);
    end
  end

  a_deq_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    deq_valid |-> 32'(deq_idx) < 32'(cnt));

endmodule
