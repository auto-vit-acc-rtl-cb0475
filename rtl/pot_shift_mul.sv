// pot_shift_mul: multiply a signed fixed-point activation by a power-of-two
// (PoT) weight using only a shifter and a conditional negation, the LUT-side
// multiplier of the mixed-scheme engine.
//
// Weight code (W_W bits): MSB = sign, low W_W-1 bits = exponent code e.
// e = 0 encodes zero; otherwise the magnitude is 2^(e-1). With W_W = 3 the
// levels are {0, +-1, +-2, +-4}: 2^W_W - 1 levels, as the paper states for
// every b-bit scheme. The exact code assignment is this design's choice.
// The product has 2*A_W bits, the same width as a Fixed A_W x A_W product,
// so Fixed and PoT rows share one accumulator format (the paper's rule
// 2^(b'-1) <= b). Purely combinational.
module pot_shift_mul #(
  parameter int unsigned A_W = vit_pkg::B_FIX,
  parameter int unsigned W_W = vit_pkg::B_POT
) (
  input  logic signed [A_W-1:0]   act,
  input  logic        [W_W-1:0]   wgt,
  output logic signed [2*A_W-1:0] prod
);
  logic              sgn;
  logic [W_W-2:0]    e;
  logic signed [2*A_W-1:0] mag;

  initial assert ((1 << (W_W - 1)) <= A_W)
    else $error("PoT width %0d does not align with fixed width %0d", W_W, A_W);

  always_comb begin
    sgn  = wgt[W_W-1];
    e    = wgt[W_W-2:0];
    mag  = (2*A_W)'(act) <<< (e - 1'b1);
    if (e == '0)  prod = '0;
    else if (sgn) prod = -mag;
    else          prod = mag;
  end
endmodule
