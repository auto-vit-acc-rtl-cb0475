// store_unit: writes a finished output tile back to memory.
//
// Started with the bank to store, it walks the tile's head slices (one in FC
// mode, N_h in MSA mode; head h lives in lane h % P_h, slot h / P_h), the
// word columns of the T_m rows, and the token pairs, and emits one beat per
// cycle: out_data[0] / out_data[1] are the same word column of tokens 2k and
// 2k+1 (A_OUT = 2 ports), out_tok_ok[1] is low for the pad token of an odd
// F. Word formats:
//   normal  : D_FIX b-bit activations (rows j*D_FIX ..), quantised by
//             out_quant; ceil(T_m/D_FIX) columns.
//   residual: LN_PER_WORD 16-bit values (rows j*8 ..) = scaled accumulator +
//             skip input; ceil(T_m/8) columns. skip_data carries the matching
//             words of the stored layer input and is consumed in lockstep.
// Rows past T_m are written as zero. Pipeline: counters -> registered
// buffer read -> output register, with valid/ready back-pressure; one beat
// per cycle when the sink is ready, so a tile takes
// slices * columns * ceil(F/2) cycles (the paper's L_out with A_out = 2).
// Lint notes unused bits of the layer configuration: the sizes M and N are
// not needed to store a tile; only F, the mode and the quantiser fields are.
module store_unit #(
  parameter int unsigned TM_FIX = vit_pkg::TM_FIX,
  parameter int unsigned TM_POT = vit_pkg::TM_POT,
  parameter int unsigned PH     = vit_pkg::PH,
  parameter int unsigned NH     = vit_pkg::NH,
  parameter int unsigned F_MAX  = vit_pkg::F_MAX,
  parameter int unsigned ACC_W  = vit_pkg::ACC_W,
  parameter int unsigned B_FIX  = vit_pkg::B_FIX,
  parameter int unsigned AXI_W  = vit_pkg::AXI_W,
  localparam int unsigned LN_W  = vit_pkg::LN_W,
  localparam int unsigned TM    = TM_FIX + TM_POT,
  localparam int unsigned D     = AXI_W / B_FIX,
  localparam int unsigned DR    = AXI_W / LN_W,
  localparam int unsigned NQ    = (D > DR) ? D : DR,
  localparam int unsigned SLOTS = NH / PH,
  localparam int unsigned PAIRS = (F_MAX + 1) / 2,
  localparam int unsigned SW    = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned KW    = (PAIRS > 1) ? $clog2(PAIRS) : 1,
  localparam int unsigned HW    = (PH > 1) ? $clog2(PH) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic                    bank,
  input  vit_pkg::layer_cfg_t     cfg,
  output logic                    busy,
  // output buffer read
  output logic                    rd_en,
  output logic                    rd_bank,
  output logic [HW-1:0]           rd_lane,
  output logic [SW-1:0]           rd_slot,
  output logic [KW-1:0]           rd_pair,
  input  logic signed [ACC_W-1:0] rd0 [TM],
  input  logic signed [ACC_W-1:0] rd1 [TM],
  // skip input stream (residual mode)
  input  logic                    skip_valid,
  output logic                    skip_ready,
  input  logic [AXI_W-1:0]        skip_data [2],
  // output stream
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [AXI_W-1:0]        out_data [2],
  output logic                    out_tok_ok [2]
);
  logic        act;          // counters running
  logic        bank_q, res;
  logic [4:0]  rq_shift, res_shift;
  logic [8:0]  f;
  logic [7:0]  h, n_slices;
  logic [7:0]  col, n_cols;
  logic [KW:0] k, n_pairs;
  logic        s1_v;
  logic [7:0]  s1_col;
  logic [KW:0] s1_k;
  logic        accept, issue;

  assign accept = s1_v && (!out_valid || out_ready) && (!res || skip_valid);
  assign issue  = act && (!s1_v || accept);
  assign skip_ready = accept && res;
  assign busy   = act || s1_v || out_valid;

  assign rd_en   = issue;
  assign rd_bank = bank_q;
  assign rd_lane = HW'(32'(h) % PH);
  assign rd_slot = SW'(32'(h) / PH);
  assign rd_pair = KW'(k);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act <= 1'b0; bank_q <= 1'b0; res <= 1'b0; rq_shift <= '0; res_shift <= '0;
      f <= '0; h <= '0; n_slices <= '0; col <= '0; n_cols <= '0; k <= '0; n_pairs <= '0;
      s1_v <= 1'b0; s1_col <= '0; s1_k <= '0;
    end else begin
      if (start && !busy) begin
        act       <= 1'b1;
        bank_q    <= bank;
        res       <= cfg.res_en && (cfg.mode == vit_pkg::MODE_FC);
        rq_shift  <= cfg.rq_shift;
        res_shift <= cfg.res_shift;
        f         <= cfg.f;
        n_slices  <= (cfg.mode == vit_pkg::MODE_MSA) ? 8'(NH) : 8'd1;
        n_cols    <= (cfg.res_en && cfg.mode == vit_pkg::MODE_FC) ? 8'((TM + DR - 1) / DR)
                                                                  : 8'((TM + D - 1) / D);
        n_pairs   <= (KW+1)'((32'(cfg.f) + 1) / 2);
        h <= '0; col <= '0; k <= '0;
      end else if (issue) begin
        if (k + 1'b1 == n_pairs) begin
          k <= '0;
          if (col + 1'b1 == n_cols) begin
            col <= '0;
            if (h + 1'b1 == n_slices) act <= 1'b0;
            else h <= h + 1'b1;
          end else col <= col + 1'b1;
        end else k <= k + 1'b1;
      end
      if (issue) begin
        s1_v <= 1'b1; s1_col <= col; s1_k <= k;
      end else if (accept) s1_v <= 1'b0;
    end
  end

  // quantisers for both tokens
  logic signed [LN_W-1:0] q [2][NQ];
  for (genvar t = 0; t < 2; t++) begin : g_tok
    for (genvar i = 0; i < NQ; i++) begin : g_q
      logic signed [ACC_W-1:0] a;
      logic signed [LN_W-1:0]  sk;
      int unsigned             ch;
      always_comb begin
        ch = 32'(s1_col) * (res ? DR : D) + i;
        a  = '0;
        if (ch < TM) a = (t == 0) ? rd0[ch] : rd1[ch];
        sk = '0;
        if (i < DR) sk = skip_data[t][(i % DR)*LN_W +: LN_W];
      end
      out_quant #(.ACC_W(ACC_W), .B_FIX(B_FIX), .LN_W(LN_W)) u_q (
        .acc(a), .res_en(res), .rq_shift(rq_shift), .res_shift(res_shift),
        .skip(sk), .q(q[t][i]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (accept) out_valid <= 1'b1;
    else if (out_ready) out_valid <= 1'b0;
  end

  always_ff @(posedge clk) begin
    if (accept) begin
      for (int t = 0; t < 2; t++) begin
        out_data[t] <= '0;
        for (int i = 0; i < NQ; i++) begin
          if (res) begin
            if (i < DR && 32'(s1_col) * DR + i < TM) out_data[t][(i % DR)*LN_W +: LN_W] <= q[t][i];
          end else begin
            if (i < D && 32'(s1_col) * D + i < TM) out_data[t][(i % D)*B_FIX +: B_FIX] <= q[t][i][B_FIX-1:0];
          end
        end
      end
      out_tok_ok[0] <= 1'b1;
      out_tok_ok[1] <= (32'(s1_k) * 2 + 1 < 32'(f));
    end
  end
endmodule
