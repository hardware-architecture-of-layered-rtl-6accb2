// max_star -- Jacobian logarithm max*(a,b) = ln(e^a + e^b) in fixed point.
//
// Built as the published three parts: a comparison picks max(a,b), a look-up
// table gives the correction ln(1 + exp(-|a-b|)) and an adder sums the two.
// The table (pldpc_pkg::maxstar_corr) holds the correction rounded to the
// nearest step of FRAC fractional bits; its contents are this design's choice.
// The sum saturates to W bits.  Purely combinational; the DFHT registers it.
module max_star #(
  parameter int W    = pldpc_pkg::W_DF_DEF,
  parameter int FRAC = pldpc_pkg::DF_FRAC_DEF
) (
  input  logic signed [W-1:0] a,
  input  logic signed [W-1:0] b,
  output logic signed [W-1:0] y
);
  import pldpc_pkg::*;

  logic signed [W:0] diff, mx, sum;
  logic        [W:0] mag;
  logic signed [W:0] corr;

  always_comb begin
    diff = (W+1)'(a) - (W+1)'(b);
    mx   = diff[W] ? (W+1)'(b) : (W+1)'(a);
    mag  = diff[W] ? (W+1)'(-diff) : (W+1)'(diff);
    corr = (W+1)'(maxstar_corr(int'(mag), FRAC));
    sum  = mx + corr;
    if (sum > (W+1)'((1 << (W-1)) - 1)) y = W'((1 << (W-1)) - 1);
    else                                y = W'(sum);
  end

endmodule
