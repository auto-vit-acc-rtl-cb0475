// head_lane: the MAC array of one attention head.
//
// Every cycle it takes the T_n activations of two tokens (the DSP packing
// works on token pairs) and forms, for each of the TM_FIX Fixed weight rows
// and the TM_POT PoT weight rows of the resident weight tile, the dot product
// with both tokens:
//   sum0[m] = sum_n w[m][n] * act0[n],  sum1[m] = sum_n w[m][n] * act1[n].
// Fixed rows use packed DSP multipliers (dsp_pack_mul): with 4-bit data two
// neighbouring rows and both tokens share one DSP, so the lane uses
// TM_FIX/2 * TN DSPs; with 5..8-bit data one DSP per row and channel.
// PoT rows use shift multipliers (pot_shift_mul), i.e. LUTs only.
// Rows 0..TM_FIX-1 of the output are the Fixed rows, TM_FIX..TM-1 the PoT
// rows. Purely combinational; the caller registers the sums.
module head_lane #(
  parameter int unsigned B_FIX  = vit_pkg::B_FIX,
  parameter int unsigned B_POT  = vit_pkg::B_POT,
  parameter int unsigned TN     = vit_pkg::TN,
  parameter int unsigned TM_FIX = vit_pkg::TM_FIX,
  parameter int unsigned TM_POT = vit_pkg::TM_POT,
  localparam int unsigned TM    = TM_FIX + TM_POT,
  localparam int unsigned SUM_W = 2*B_FIX + $clog2(TN) + 1
) (
  input  logic signed [B_FIX-1:0] act0 [TN],
  input  logic signed [B_FIX-1:0] act1 [TN],
  input  logic signed [B_FIX-1:0] wfix [TM_FIX][TN],
  input  logic        [B_POT-1:0] wpot [TM_POT][TN],
  output logic signed [SUM_W-1:0] sum0 [TM],
  output logic signed [SUM_W-1:0] sum1 [TM]
);
  localparam bit QUAD = (B_FIX <= 4);

  // products [row][channel] for token 0 and token 1
  logic signed [2*B_FIX-1:0] pr0 [TM][TN];
  logic signed [2*B_FIX-1:0] pr1 [TM][TN];

  initial assert (!QUAD || (TM_FIX % 2 == 0)) else $error("TM_FIX must be even for 4-bit packing");

  for (genvar n = 0; n < TN; n++) begin : g_ch
    if (QUAD) begin : g_quad
      for (genvar r = 0; r < TM_FIX/2; r++) begin : g_dsp
        logic signed [2*B_FIX-1:0] p [4];
        dsp_pack_mul #(.B(B_FIX)) u_dsp (
          .w0(wfix[2*r][n]), .w1(wfix[2*r+1][n]),
          .a0(act0[n]), .a1(act1[n]), .p(p));
        assign pr0[2*r][n]   = p[0];
        assign pr1[2*r][n]   = p[1];
        assign pr0[2*r+1][n] = p[2];
        assign pr1[2*r+1][n] = p[3];
      end
    end else begin : g_pair
      for (genvar r = 0; r < TM_FIX; r++) begin : g_dsp
        logic signed [2*B_FIX-1:0] p [4];
        dsp_pack_mul #(.B(B_FIX)) u_dsp (
          .w0(wfix[r][n]), .w1(wfix[r][n]),
          .a0(act0[n]), .a1(act1[n]), .p(p));
        assign pr0[r][n] = p[0];
        assign pr1[r][n] = p[1];
      end
    end
    for (genvar r = 0; r < TM_POT; r++) begin : g_pot
      pot_shift_mul #(.A_W(B_FIX), .W_W(B_POT)) u_p0 (
        .act(act0[n]), .wgt(wpot[r][n]), .prod(pr0[TM_FIX+r][n]));
      pot_shift_mul #(.A_W(B_FIX), .W_W(B_POT)) u_p1 (
        .act(act1[n]), .wgt(wpot[r][n]), .prod(pr1[TM_FIX+r][n]));
    end
  end

  // reduction over the T_n input channels
  always_comb begin
    for (int m = 0; m < TM; m++) begin
      sum0[m] = '0;
      sum1[m] = '0;
      for (int n = 0; n < TN; n++) begin
        sum0[m] = sum0[m] + SUM_W'(pr0[m][n]);
        sum1[m] = sum1[m] + SUM_W'(pr1[m][n]);
      end
    end
  end
endmodule
