// mha_compute_engine: P_h head lanes working in parallel, the multi-head
// attention compute engine.
//
// Each cycle with in_valid it takes, for every lane p, the activations of a
// token pair (act0[p], act1[p]) and that lane's weight tiles, and produces
// T_m dot products per token in each lane (head_lane). The head reduction
// depends on the layer kind:
//   MODE_FC : the P_h lane results are added; res[0] holds the sum, the
//             other lanes read zero (an FC layer sums over all heads).
//   MODE_MSA: res[p] is lane p's own result (attention heads stay apart).
// Results and the side tags (pair index, first flag, slot) appear one
// cycle after the inputs (one register stage).
module mha_compute_engine #(
  parameter int unsigned B_FIX  = vit_pkg::B_FIX,
  parameter int unsigned B_POT  = vit_pkg::B_POT,
  parameter int unsigned TN     = vit_pkg::TN,
  parameter int unsigned TM_FIX = vit_pkg::TM_FIX,
  parameter int unsigned TM_POT = vit_pkg::TM_POT,
  parameter int unsigned PH     = vit_pkg::PH,
  parameter int unsigned ACC_W  = vit_pkg::ACC_W,
  parameter int unsigned TAG_W  = 16,
  localparam int unsigned TM    = TM_FIX + TM_POT,
  localparam int unsigned SUM_W = 2*B_FIX + $clog2(TN) + 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  vit_pkg::layer_mode_e    mode,
  input  logic [TAG_W-1:0]        in_tag,
  input  logic signed [B_FIX-1:0] act0 [PH][TN],
  input  logic signed [B_FIX-1:0] act1 [PH][TN],
  input  logic signed [B_FIX-1:0] wfix [PH][TM_FIX][TN],
  input  logic        [B_POT-1:0] wpot [PH][TM_POT][TN],
  output logic                    out_valid,
  output logic [TAG_W-1:0]        out_tag,
  output logic signed [ACC_W-1:0] res0 [PH][TM],
  output logic signed [ACC_W-1:0] res1 [PH][TM]
);
  logic signed [SUM_W-1:0] s0 [PH][TM];
  logic signed [SUM_W-1:0] s1 [PH][TM];
  logic signed [ACC_W-1:0] r0 [PH][TM];
  logic signed [ACC_W-1:0] r1 [PH][TM];

  for (genvar p = 0; p < PH; p++) begin : g_lane
    head_lane #(.B_FIX(B_FIX), .B_POT(B_POT), .TN(TN), .TM_FIX(TM_FIX), .TM_POT(TM_POT)) u_lane (
      .act0(act0[p]), .act1(act1[p]), .wfix(wfix[p]), .wpot(wpot[p]),
      .sum0(s0[p]), .sum1(s1[p]));
  end

  always_comb begin
    for (int m = 0; m < TM; m++) begin
      for (int p = 0; p < PH; p++) begin
        r0[p][m] = ACC_W'(s0[p][m]);
        r1[p][m] = ACC_W'(s1[p][m]);
      end
      if (mode == vit_pkg::MODE_FC) begin
        for (int p = 1; p < PH; p++) begin
          r0[0][m] = r0[0][m] + ACC_W'(s0[p][m]);
          r1[0][m] = r1[0][m] + ACC_W'(s1[p][m]);
          r0[p][m] = '0;
          r1[p][m] = '0;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      out_tag <= in_tag;
      res0    <= r0;
      res1    <= r1;
    end
  end
endmodule
