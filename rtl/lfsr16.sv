// lfsr16: 16-bit maximal-length Galois LFSR (polynomial x^16+x^14+x^13+x^11+1,
// taps 0xB400) used as the random number source of the epsilon-greedy choice.
// It advances every clock when en is high; reset loads a non-zero seed. The
// original work only says rand() is compared with epsilon; the generator is
// this design's choice.
module lfsr16 #(
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [15:0] value
);
  always_ff @(posedge clk) begin
    if (!rst_n)  value <= SEED;
    else if (en) value <= value[0] ? ((value >> 1) ^ 16'hB400) : (value >> 1);
  end
endmodule
