// theta_regfile: the parameter registers of the per-core linear models.
//
// Each core k has NTHETA signed Q8.8 parameters theta_0..theta_3, one per
// feature, that weight the features in its predicted reward (equation (1)).
// All parameters reset to zero, as the CADS algorithm initialises them. One
// parameter can be written per clock (the Q-learning unit updates them one at
// a time); all of them are visible at the output at once for the model
// pipeline. A write takes effect at the rising edge. Synchronous active-low
// reset.
module theta_regfile
  import cads_pkg::*;
#(
  parameter int unsigned NCORES = NCORES_D,
  parameter int unsigned NTHETA = NFEAT
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       we,
  input  logic [$clog2(NCORES)-1:0]  wcore,
  input  logic [$clog2(NTHETA)-1:0]  widx,
  input  fix_t                       wdata,
  output fix_t [NCORES-1:0][NTHETA-1:0] theta
);
  always_ff @(posedge clk) begin
    if (!rst_n)  theta <= '0;
    else if (we) theta[wcore][widx] <= wdata;
  end
endmodule
