// input_tile_buf: double-buffered input tile, P_h heads x F tokens x T_n
// activations.
//
// Each entry is one token's T_n activations of one head (one memory word,
// since T_n = D). Write side: up to A_IN words per cycle from the loader,
// each with its own bank, head and token address. Read side: the compute
// issuer names a bank and a token pair k; one cycle later rd0[p] and rd1[p]
// hold tokens 2k and 2k+1 of every head p (synchronous read, two read
// ports). While the engine reads one bank the loader fills the other; the
// controller guarantees the two never touch the same bank in one cycle.
// Depth is F_MAX rounded up to an even count; the pad token of an odd F is
// read but its results are never stored.
module input_tile_buf #(
  parameter int unsigned B_FIX = vit_pkg::B_FIX,
  parameter int unsigned TN    = vit_pkg::TN,
  parameter int unsigned PH    = vit_pkg::PH,
  parameter int unsigned F_MAX = vit_pkg::F_MAX,
  parameter int unsigned A_IN  = vit_pkg::A_IN,
  localparam int unsigned PAIRS = (F_MAX + 1) / 2,
  localparam int unsigned W     = TN * B_FIX,
  localparam int unsigned HW    = (PH > 1) ? $clog2(PH) : 1,
  localparam int unsigned TW    = $clog2(2*PAIRS),
  localparam int unsigned KW    = (PAIRS > 1) ? $clog2(PAIRS) : 1
) (
  input  logic          clk,
  input  logic          wr_en   [A_IN],
  input  logic          wr_bank [A_IN],
  input  logic [HW-1:0] wr_head [A_IN],
  input  logic [TW-1:0] wr_tok  [A_IN],
  input  logic [W-1:0]  wr_data [A_IN],
  input  logic          rd_en,
  input  logic          rd_bank,
  input  logic [KW-1:0] rd_pair,
  output logic [W-1:0]  rd0 [PH],
  output logic [W-1:0]  rd1 [PH]
);
  // one array per head so each head can be read in parallel
  for (genvar p = 0; p < PH; p++) begin : g_head
    logic [W-1:0] mem [2][2*PAIRS];
    always_ff @(posedge clk) begin
      for (int j = 0; j < A_IN; j++)
        if (wr_en[j] && wr_head[j] == HW'(p) && 32'(wr_tok[j]) < 2*PAIRS)
          mem[wr_bank[j]][wr_tok[j]] <= wr_data[j];
      if (rd_en) begin
        rd0[p] <= mem[rd_bank][{rd_pair, 1'b0}];
        rd1[p] <= mem[rd_bank][{rd_pair, 1'b1}];
      end
    end
  end
endmodule
