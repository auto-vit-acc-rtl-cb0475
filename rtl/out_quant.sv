// out_quant: turns one output accumulator into the value written back to
// memory.
//   res_en = 0: next-layer activation, the Fixed quantiser of the paper's
//               algorithm: q = sat_b( round(acc / 2^rq_shift) ), b = B_FIX.
//   res_en = 1: skip connection X' = F(LN(X)) + X with 16-bit (Q8.8) data:
//               q = sat16( round(acc / 2^res_shift) + skip ).
// Rounding is round-half-up (add 2^(shift-1), arithmetic right shift). The
// scaling factors are powers of two, a choice of this design. Combinational.
module out_quant #(
  parameter int unsigned ACC_W = vit_pkg::ACC_W,
  parameter int unsigned B_FIX = vit_pkg::B_FIX,
  parameter int unsigned LN_W  = vit_pkg::LN_W
) (
  input  logic signed [ACC_W-1:0] acc,
  input  logic                    res_en,
  input  logic [4:0]              rq_shift,
  input  logic [4:0]              res_shift,
  input  logic signed [LN_W-1:0]  skip,
  output logic signed [LN_W-1:0]  q
);
  localparam logic signed [ACC_W+1:0] QMAX = (ACC_W+2)'((1 << (B_FIX-1)) - 1);
  localparam logic signed [ACC_W+1:0] QMIN = -QMAX;  // symmetric: 2^b - 1 levels
  localparam logic signed [ACC_W+1:0] SMAX = (ACC_W+2)'((1 << (LN_W-1)) - 1);
  localparam logic signed [ACC_W+1:0] SMIN = -SMAX - 1;

  logic [4:0]              sh;
  logic signed [ACC_W+1:0] rnd, scaled, sum;

  always_comb begin
    sh     = res_en ? res_shift : rq_shift;
    rnd    = (sh == 0) ? '0 : ((ACC_W+2)'(1) <<< (sh - 1'b1));
    scaled = ((ACC_W+2)'(acc) + rnd) >>> sh;
    if (res_en) begin
      sum = scaled + (ACC_W+2)'(skip);
      if (sum > SMAX)      q = LN_W'(SMAX);
      else if (sum < SMIN) q = LN_W'(SMIN);
      else                 q = LN_W'(sum);
    end else begin
      sum = scaled;
      if (scaled > QMAX)      q = LN_W'(QMAX);
      else if (scaled < QMIN) q = LN_W'(QMIN);
      else                    q = LN_W'(scaled);
    end
  end
endmodule
