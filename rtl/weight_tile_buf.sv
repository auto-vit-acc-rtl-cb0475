// weight_tile_buf: double-buffered weight tiles of the P_h heads: per head a
// TM_FIX x T_n tile of b-bit Fixed weights and a TM_POT x T_n tile of b'-bit
// PoT weights.
//
// A write carries one weight row: rows 0..TM_FIX-1 are Fixed rows (T_n
// b-bit values filling the word), rows TM_FIX..TM-1 are PoT rows (T_n b'-bit
// values in the low bits of the word). Up to A_WGT rows are written per
// cycle. The whole tile of the selected bank is read every cycle, so it is
// held in registers; rd_bank selects it combinationally.
module weight_tile_buf #(
  parameter int unsigned B_FIX  = vit_pkg::B_FIX,
  parameter int unsigned B_POT  = vit_pkg::B_POT,
  parameter int unsigned TN     = vit_pkg::TN,
  parameter int unsigned TM_FIX = vit_pkg::TM_FIX,
  parameter int unsigned TM_POT = vit_pkg::TM_POT,
  parameter int unsigned PH     = vit_pkg::PH,
  parameter int unsigned A_WGT  = vit_pkg::A_WGT,
  parameter int unsigned AXI_W  = vit_pkg::AXI_W,
  localparam int unsigned TM    = TM_FIX + TM_POT,
  localparam int unsigned HW    = (PH > 1) ? $clog2(PH) : 1,
  localparam int unsigned RW    = $clog2(TM),
  localparam int unsigned FW    = (TM_FIX > 1) ? $clog2(TM_FIX) : 1,
  localparam int unsigned PW    = (TM_POT > 1) ? $clog2(TM_POT) : 1
) (
  input  logic                    clk,
  input  logic                    wr_en   [A_WGT],
  input  logic                    wr_bank [A_WGT],
  input  logic [HW-1:0]           wr_head [A_WGT],
  input  logic [RW-1:0]           wr_row  [A_WGT],
  input  logic [AXI_W-1:0]        wr_data [A_WGT],
  input  logic                    rd_bank,
  output logic signed [B_FIX-1:0] wfix [PH][TM_FIX][TN],
  output logic        [B_POT-1:0] wpot [PH][TM_POT][TN]
);
  logic signed [B_FIX-1:0] fix_q [2][PH][TM_FIX][TN];
  logic        [B_POT-1:0] pot_q [2][PH][TM_POT][TN];

  initial assert (TN * B_FIX <= AXI_W) else $error("a Fixed weight row must fit one word");

  always_ff @(posedge clk) begin
    for (int j = 0; j < A_WGT; j++) begin
      if (wr_en[j]) begin
        for (int n = 0; n < TN; n++) begin
          if (32'(wr_row[j]) < TM_FIX)
            fix_q[wr_bank[j]][wr_head[j]][FW'(wr_row[j])][n] <= wr_data[j][n*B_FIX +: B_FIX];
          else
            pot_q[wr_bank[j]][wr_head[j]][PW'(32'(wr_row[j]) - TM_FIX)][n] <= wr_data[j][n*B_POT +: B_POT];
        end
      end
    end
  end

  always_comb begin
    wfix = fix_q[rd_bank];
    wpot = pot_q[rd_bank];
  end
endmodule
