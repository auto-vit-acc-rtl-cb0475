// vit_acc_top: mixed-scheme quantised Vision Transformer accelerator.
//
// One start runs one matrix-multiplication layer of a ViT encoder block
// (an FC layer, or the per-head matmuls of multi-head attention) on b-bit
// activations and a weight matrix whose rows are either Fixed-point (b-bit,
// multiplied on packed DSPs) or power-of-two (b'-bit, multiplied by
// shifting). The layer is processed in tiles (Fig. 3 of the tiling scheme):
//   tile_controller  loop nest and double buffering
//   input_tile_buf   P_h x F x T_n activations, 2 banks
//   weight_tile_buf  P_h x (T_m^Fix + T_m^PoT) x T_n weights, 2 banks
//   mha_compute_engine  P_h head lanes, two tokens per cycle
//   output_tile_buf  accumulators, N_h head slots (MSA) or one (FC), 2 banks
//   store_unit       requantisation or skip-connection add, output stream
// The LayerNorm unit is independent: it turns 16-bit layer inputs into the
// b-bit inputs of the next FC layer, with its own input and output streams.
// Softmax, scaling and GELU run on the host processor and are not here.
//
// Host protocol: set cfg and pulse start while busy is low; the input,
// weight (and, in residual mode, skip) streams must then deliver the tiles
// in the order described in tile_controller and store_unit; done pulses
// after the last output beat has been accepted. cfg is sampled at start.
// Rows of a tile past M are expected to be zero-padded by the host and
// their outputs are discarded by it.
module vit_acc_top #(
  parameter int unsigned AXI_W  = vit_pkg::AXI_W,
  parameter int unsigned B_FIX  = vit_pkg::B_FIX,
  parameter int unsigned B_POT  = vit_pkg::B_POT,
  parameter int unsigned TM_FIX = vit_pkg::TM_FIX,
  parameter int unsigned TM_POT = vit_pkg::TM_POT,
  parameter int unsigned PH     = vit_pkg::PH,
  parameter int unsigned NH     = vit_pkg::NH,
  parameter int unsigned F_MAX  = vit_pkg::F_MAX,
  parameter int unsigned ACC_W  = vit_pkg::ACC_W,
  parameter int unsigned A_IN   = vit_pkg::A_IN,
  parameter int unsigned A_WGT  = vit_pkg::A_WGT,
  parameter int unsigned LN_N_MAX = 768,
  localparam int unsigned TN    = AXI_W / B_FIX,       // T_n = D
  localparam int unsigned LN_AW = $clog2(LN_N_MAX / (AXI_W / vit_pkg::LN_W))
) (
  input  logic                clk,
  input  logic                rst_n,
  // layer control
  input  logic                start,
  input  vit_pkg::layer_cfg_t cfg,
  output logic                busy,
  output logic                done,
  // input tile stream (A_in ports)
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [AXI_W-1:0]    in_data [A_IN],
  // weight tile stream (A_wgt ports)
  input  logic                wgt_valid,
  output logic                wgt_ready,
  input  logic [AXI_W-1:0]    wgt_data [A_WGT],
  // skip-connection input stream (residual mode)
  input  logic                skip_valid,
  output logic                skip_ready,
  input  logic [AXI_W-1:0]    skip_data [2],
  // output stream (A_out = 2 ports: the two tokens of a pair)
  output logic                out_valid,
  input  logic                out_ready,
  output logic [AXI_W-1:0]    out_data [2],
  output logic                out_tok_ok [2],
  // LayerNorm unit
  input  logic [15:0]         ln_n_ch,
  input  logic [4:0]          ln_q_shift,
  input  logic                ln_par_we,
  input  logic [LN_AW-1:0]    ln_par_addr,
  input  logic [AXI_W-1:0]    ln_par_gamma,
  input  logic [AXI_W-1:0]    ln_par_beta,
  input  logic                ln_in_valid,
  output logic                ln_in_ready,
  input  logic [AXI_W-1:0]    ln_in_data,
  output logic                ln_out_valid,
  input  logic                ln_out_ready,
  output logic [AXI_W-1:0]    ln_out_data,
  output logic                ln_busy
);
  localparam int unsigned TM    = TM_FIX + TM_POT;
  localparam int unsigned SLOTS = NH / PH;
  localparam int unsigned PAIRS = (F_MAX + 1) / 2;
  localparam int unsigned SW    = (SLOTS > 1) ? $clog2(SLOTS) : 1;
  localparam int unsigned KW    = (PAIRS > 1) ? $clog2(PAIRS) : 1;
  localparam int unsigned HW    = (PH > 1) ? $clog2(PH) : 1;
  localparam int unsigned TW    = $clog2(2*PAIRS);
  localparam int unsigned RW    = $clog2(TM);
  localparam int unsigned CTAG  = 1 + 1 + SW + KW;
  localparam int unsigned ETAG  = CTAG + 1;

  vit_pkg::layer_cfg_t cfg_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) cfg_q <= '0;
    else if (start && !busy) cfg_q <= cfg;

  // ---------------- controller ----------------
  logic          ib_wr_en [A_IN];
  logic          ib_wr_bank;
  logic [HW-1:0] ib_wr_head;
  logic [TW-1:0] ib_wr_tok [A_IN];
  logic          wb_wr_en [A_WGT];
  logic          wb_wr_bank;
  logic [HW-1:0] wb_wr_head;
  logic [RW-1:0] wb_wr_row [A_WGT];
  logic          iss_valid, iss_bank;
  logic [KW-1:0] iss_pair;
  logic          eng_valid, eng_wbank, eng_lane_all;
  logic [CTAG-1:0] eng_tag;
  logic          st_start, st_bank, st_busy;

  tile_controller #(.TN(TN), .TM_FIX(TM_FIX), .TM_POT(TM_POT), .PH(PH), .NH(NH),
                    .F_MAX(F_MAX), .A_IN(A_IN), .A_WGT(A_WGT)) u_ctrl (
    .clk, .rst_n, .start(start && !busy), .cfg, .busy, .done,
    .in_valid, .in_ready, .ib_wr_en, .ib_wr_bank, .ib_wr_head, .ib_wr_tok,
    .wgt_valid, .wgt_ready, .wb_wr_en, .wb_wr_bank, .wb_wr_head, .wb_wr_row,
    .iss_valid, .iss_bank, .iss_pair,
    .eng_valid, .eng_wbank, .eng_tag, .eng_lane_all,
    .st_start, .st_bank, .st_busy);

  // ---------------- tile buffers ----------------
  logic          ib_wen   [A_IN];
  logic          ib_wbank [A_IN];
  logic [HW-1:0] ib_whead [A_IN];
  logic [AXI_W-1:0] ib_rd0 [PH];
  logic [AXI_W-1:0] ib_rd1 [PH];
  always_comb
    for (int j = 0; j < A_IN; j++) begin
      ib_wen[j] = ib_wr_en[j]; ib_wbank[j] = ib_wr_bank; ib_whead[j] = ib_wr_head;
    end

  input_tile_buf #(.B_FIX(B_FIX), .TN(TN), .PH(PH), .F_MAX(F_MAX), .A_IN(A_IN)) u_ibuf (
    .clk, .wr_en(ib_wen), .wr_bank(ib_wbank), .wr_head(ib_whead), .wr_tok(ib_wr_tok),
    .wr_data(in_data), .rd_en(iss_valid), .rd_bank(iss_bank), .rd_pair(iss_pair),
    .rd0(ib_rd0), .rd1(ib_rd1));

  logic          wb_wbank [A_WGT];
  logic [HW-1:0] wb_whead [A_WGT];
  always_comb
    for (int j = 0; j < A_WGT; j++) begin
      wb_wbank[j] = wb_wr_bank; wb_whead[j] = wb_wr_head;
    end
  logic signed [B_FIX-1:0] wfix [PH][TM_FIX][TN];
  logic        [B_POT-1:0] wpot [PH][TM_POT][TN];

  weight_tile_buf #(.B_FIX(B_FIX), .B_POT(B_POT), .TN(TN), .TM_FIX(TM_FIX), .TM_POT(TM_POT),
                    .PH(PH), .A_WGT(A_WGT), .AXI_W(AXI_W)) u_wbuf (
    .clk, .wr_en(wb_wr_en), .wr_bank(wb_wbank), .wr_head(wb_whead), .wr_row(wb_wr_row),
    .wr_data(wgt_data), .rd_bank(eng_wbank), .wfix, .wpot);

  // ---------------- compute engine ----------------
  logic signed [B_FIX-1:0] act0 [PH][TN];
  logic signed [B_FIX-1:0] act1 [PH][TN];
  always_comb
    for (int p = 0; p < PH; p++)
      for (int n = 0; n < TN; n++) begin
        act0[p][n] = ib_rd0[p][n*B_FIX +: B_FIX];
        act1[p][n] = ib_rd1[p][n*B_FIX +: B_FIX];
      end

  logic            res_valid;
  logic [ETAG-1:0] res_tag;
  logic signed [ACC_W-1:0] res0 [PH][TM];
  logic signed [ACC_W-1:0] res1 [PH][TM];

  mha_compute_engine #(.B_FIX(B_FIX), .B_POT(B_POT), .TN(TN), .TM_FIX(TM_FIX), .TM_POT(TM_POT),
                       .PH(PH), .ACC_W(ACC_W), .TAG_W(ETAG)) u_eng (
    .clk, .rst_n, .in_valid(eng_valid),
    .mode(eng_lane_all ? vit_pkg::MODE_MSA : vit_pkg::MODE_FC),
    .in_tag({eng_lane_all, eng_tag}), .act0, .act1, .wfix, .wpot,
    .out_valid(res_valid), .out_tag(res_tag), .res0, .res1);

  // ---------------- output buffer and store ----------------
  logic          acc_lane_en [PH];
  logic          acc_bank, acc_first;
  logic [SW-1:0] acc_slot;
  logic [KW-1:0] acc_pair;
  logic          lane_all;
  assign {lane_all, acc_bank, acc_first, acc_slot, acc_pair} = res_tag;
  always_comb
    for (int p = 0; p < PH; p++) acc_lane_en[p] = lane_all || (p == 0);

  logic          rd_en, rd_bank;
  logic [HW-1:0] rd_lane;
  logic [SW-1:0] rd_slot;
  logic [KW-1:0] rd_pair;
  logic signed [ACC_W-1:0] ob_rd0 [TM];
  logic signed [ACC_W-1:0] ob_rd1 [TM];

  output_tile_buf #(.TM_FIX(TM_FIX), .TM_POT(TM_POT), .PH(PH), .NH(NH), .F_MAX(F_MAX),
                    .ACC_W(ACC_W)) u_obuf (
    .clk, .acc_en(res_valid), .acc_lane_en, .acc_bank, .acc_first, .acc_slot, .acc_pair,
    .acc0(res0), .acc1(res1),
    .rd_en, .rd_bank, .rd_lane, .rd_slot, .rd_pair, .rd0(ob_rd0), .rd1(ob_rd1));

  store_unit #(.TM_FIX(TM_FIX), .TM_POT(TM_POT), .PH(PH), .NH(NH), .F_MAX(F_MAX),
               .ACC_W(ACC_W), .B_FIX(B_FIX), .AXI_W(AXI_W)) u_store (
    .clk, .rst_n, .start(st_start), .bank(st_bank), .cfg(cfg_q), .busy(st_busy),
    .rd_en, .rd_bank, .rd_lane, .rd_slot, .rd_pair, .rd0(ob_rd0), .rd1(ob_rd1),
    .skip_valid, .skip_ready, .skip_data,
    .out_valid, .out_ready, .out_data, .out_tok_ok);

  // ---------------- LayerNorm ----------------
  layernorm_unit #(.N_MAX(LN_N_MAX), .B_FIX(B_FIX), .AXI_W(AXI_W)) u_ln (
    .clk, .rst_n, .n_ch(ln_n_ch), .q_shift(ln_q_shift),
    .par_we(ln_par_we), .par_addr(ln_par_addr), .par_gamma(ln_par_gamma), .par_beta(ln_par_beta),
    .in_valid(ln_in_valid), .in_ready(ln_in_ready), .in_data(ln_in_data),
    .out_valid(ln_out_valid), .out_ready(ln_out_ready), .out_data(ln_out_data),
    .busy(ln_busy));
endmodule
