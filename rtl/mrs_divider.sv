// mrs_divider: the 16-bit fixed-point divider of the reward calculator.
//
// Computes the memory-related starvation of one core, equation (2):
//   MRStarvation = StallTime / NumberOfAccesses
// StallTime is an unsigned count of DRAM cycles, NumberOfAccesses the number
// of waiting petitions of the core (NumPet). The quotient is unsigned Q8.8,
// (stall << 8) / num, saturated to 16 bits; a core with no waiting petition
// has a starvation of zero. The original work gives a single 16-bit divider
// that handles one core per clock; its internal structure is not given, and
// this one is a plain combinational divide followed by an output register.
//
// Timing: one clock of latency (in_* sampled at a rising edge, out_* valid
// after it).
module mrs_divider #(
  parameter int unsigned NW = 7,    // width of the access count
  parameter int unsigned CW = 4     // width of the tag carried along
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [CW-1:0] in_tag,
  input  logic [15:0]   stall,
  input  logic [NW-1:0] num,
  output logic          out_valid,
  output logic [CW-1:0] out_tag,
  output logic [15:0]   mrs
);
  logic [23:0] q;
  always_comb begin
    q = (num == '0) ? 24'd0 : ({stall, 8'd0} / 24'(num));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
      mrs       <= '0;
    end else begin
      out_valid <= in_valid;
      out_tag   <= in_tag;
      mrs       <= (q > 24'hFFFF) ? 16'hFFFF : q[15:0];
    end
  end
endmodule
