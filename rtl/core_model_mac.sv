// core_model_mac: pipeline stage 1 of the next-core circuit.
//
// Computes the predicted long-term reward of one core model,
//   reward = theta_0*NumPet + theta_1*RowHitPet + theta_2*BPPet + theta_3*HistPet
// (equation (1)), with four 16-bit multipliers (one per parameter) and an adder
// tree, one core model per clock, as in the original hardware description.
// Theta is signed Q8.8, the features are unsigned integer counts, so each
// product is already Q8.8; the sum is kept wide and saturated once to 16 bits
// (saturation is this design's choice).
//
// Timing: one clock of latency. in_valid/in_core/theta/feat are sampled at a
// rising edge and out_valid/out_core/out_reward are valid after it.
module core_model_mac
  import cads_pkg::*;
#(
  parameter int unsigned CW = 4       // core index width
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [CW-1:0]          in_core,
  input  fix_t  [NFEAT-1:0]      theta,
  input  feat_t [NFEAT-1:0]      feat,
  output logic                   out_valid,
  output logic [CW-1:0]          out_core,
  output fix_t                   out_reward
);
  logic signed [47:0] sum;
  always_comb begin
    sum = '0;
    for (int i = 0; i < NFEAT; i++)
      sum = sum + 48'($signed(34'(theta[i]) * $signed({18'd0, feat[i]})));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_core   <= '0;
      out_reward <= '0;
    end else begin
      out_valid  <= in_valid;
      out_core   <= in_core;
      out_reward <= sat16(sum);
    end
  end
endmodule
