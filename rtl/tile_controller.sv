// tile_controller: runs one layer of the accelerator over its tile loops.
//
// Loop nest (Fig. 3 tiling): for each output tile of T_m = TM_FIX + TM_POT
// rows (ceil(M/T_m) tiles), for each of the G = N/(P_h*T_n) input-channel
// groups, load the input tile (P_h heads x F tokens x T_n) and the weight
// tiles (P_h x T_m x T_n), then compute ceil(F/2) token pairs. Group g
// covers head block hb = g / (N/(N_h*T_n)) and chunk c of T_n channels
// inside each head.
//
// Double buffering: a tile is processed as phases 0..G. Phase k loads group
// k into bank k%2 and computes group k-1 from bank (k-1)%2; it ends when
// both have finished, so a phase lasts exactly max(L_in, L_wgt, L_cmpt) cycles
// (input and weight streams load in parallel). After phase G the engine
// pipeline drains (2 cycles), the finished output tile is handed to the
// store unit, and the next tile starts accumulating into the other output
// bank; before handing over a tile the controller waits until the previous
// store is done, so a tile takes max(compute, L_out). The layer ends after
// the last store.
//
// Input stream: one beat = A_IN words, tokens beat*A_IN .. of one head,
// heads in order; ceil(F/A_IN) beats per head. Weight stream: one beat =
// A_WGT rows of one head, first the ceil(TM_FIX/A_WGT) Fixed beats then the
// ceil(TM_POT/A_WGT) PoT beats. Both use valid/ready.
// Issue port: iss_* names a token pair to read from the input buffer; the
// eng_* outputs are the same request one cycle later, aligned with the read
// data, for the compute engine and the weight bank select.
// Lint notes unused bits of the layer configuration: the controller reads
// only the sizes and the mode; the quantiser fields belong to the store unit.
module tile_controller #(
  parameter int unsigned TN     = vit_pkg::TN,
  parameter int unsigned TM_FIX = vit_pkg::TM_FIX,
  parameter int unsigned TM_POT = vit_pkg::TM_POT,
  parameter int unsigned PH     = vit_pkg::PH,
  parameter int unsigned NH     = vit_pkg::NH,
  parameter int unsigned F_MAX  = vit_pkg::F_MAX,
  parameter int unsigned A_IN   = vit_pkg::A_IN,
  parameter int unsigned A_WGT  = vit_pkg::A_WGT,
  localparam int unsigned TM    = TM_FIX + TM_POT,
  localparam int unsigned SLOTS = NH / PH,
  localparam int unsigned PAIRS = (F_MAX + 1) / 2,
  localparam int unsigned SW    = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned KW    = (PAIRS > 1) ? $clog2(PAIRS) : 1,
  localparam int unsigned HW    = (PH > 1) ? $clog2(PH) : 1,
  localparam int unsigned TW    = $clog2(2*PAIRS),
  localparam int unsigned RW    = $clog2(TM),
  localparam int unsigned FB    = (TM_FIX + A_WGT - 1) / A_WGT,   // Fixed weight beats per head
  localparam int unsigned PB    = (TM_POT + A_WGT - 1) / A_WGT,   // PoT weight beats per head
  localparam int unsigned TAG_W = 1 + 1 + SW + KW                  // {bank, first, slot, pair}
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  vit_pkg::layer_cfg_t  cfg,
  output logic                 busy,
  output logic                 done,
  // input stream and input-buffer writes
  input  logic                 in_valid,
  output logic                 in_ready,
  output logic                 ib_wr_en   [A_IN],
  output logic                 ib_wr_bank,
  output logic [HW-1:0]        ib_wr_head,
  output logic [TW-1:0]        ib_wr_tok  [A_IN],
  // weight stream and weight-buffer writes
  input  logic                 wgt_valid,
  output logic                 wgt_ready,
  output logic                 wb_wr_en   [A_WGT],
  output logic                 wb_wr_bank,
  output logic [HW-1:0]        wb_wr_head,
  output logic [RW-1:0]        wb_wr_row  [A_WGT],
  // compute issue (input-buffer read)
  output logic                 iss_valid,
  output logic                 iss_bank,
  output logic [KW-1:0]        iss_pair,
  // engine request, one cycle after issue
  output logic                 eng_valid,
  output logic                 eng_wbank,
  output logic [TAG_W-1:0]     eng_tag,
  output logic                 eng_lane_all,   // 1: MSA, every lane accumulates
  // store hand-over
  output logic                 st_start,
  output logic                 st_bank,
  input  logic                 st_busy
);
  typedef enum logic [2:0] {S_IDLE, S_RUN, S_DRAIN, S_HAND, S_FIN0, S_FIN} state_e;
  state_e state;

  vit_pkg::layer_cfg_t c;
  logic [15:0] n_tiles, n_groups, cph, tile;
  logic [15:0] k;                     // phase
  logic [8:0]  in_beats;              // beats per head
  logic [KW:0] n_pairs;
  // loaders
  logic [HW-1:0] in_head, w_head;
  logic [8:0]    in_beat;
  logic [7:0]    w_beat;
  logic          in_done, w_done;
  // compute
  logic [KW:0]   pair;
  logic          cmp_done;
  logic [15:0]   cmp_c, cmp_hb, cmp_g;
  logic [1:0]    drain;
  logic          obank;

  logic load_act, cmp_act, phase_end, in_fire, w_fire, iss;
  logic in_last, w_last, cmp_last, in_fin, w_fin, cmp_fin;

  assign load_act  = (state == S_RUN) && (k < n_groups);
  assign cmp_act   = (state == S_RUN) && (k != 0);
  assign in_ready  = load_act && !in_done;
  assign wgt_ready = load_act && !w_done;
  assign in_fire   = in_valid && in_ready;
  assign w_fire    = wgt_valid && wgt_ready;
  assign iss       = cmp_act && !cmp_done;
  // a phase ends in the cycle of its last transfer or issue
  assign in_last   = (32'(in_beat) + 1 == 32'(in_beats)) && (32'(in_head) == PH - 1);
  assign w_last    = (32'(w_beat) + 1 == FB + PB) && (32'(w_head) == PH - 1);
  assign cmp_last  = (pair + 1'b1 == n_pairs);
  assign in_fin    = in_done || (in_fire && in_last);
  assign w_fin     = w_done || (w_fire && w_last);
  assign cmp_fin   = cmp_done || (iss && cmp_last);
  assign phase_end = (state == S_RUN) && (!load_act || (in_fin && w_fin)) && (!cmp_act || cmp_fin);
  assign busy      = (state != S_IDLE);

  // input-buffer write addresses
  always_comb begin
    ib_wr_bank = k[0];
    ib_wr_head = in_head;
    for (int j = 0; j < A_IN; j++) begin
      ib_wr_tok[j] = TW'(32'(in_beat) * A_IN + j);
      ib_wr_en[j]  = in_fire && (32'(in_beat) * A_IN + j < 32'(c.f));
    end
    wb_wr_bank = k[0];
    wb_wr_head = w_head;
    for (int j = 0; j < A_WGT; j++) begin
      if (32'(w_beat) < FB) begin
        wb_wr_row[j] = RW'(32'(w_beat) * A_WGT + j);
        wb_wr_en[j]  = w_fire && (32'(w_beat) * A_WGT + j < TM_FIX);
      end else begin
        wb_wr_row[j] = RW'(TM_FIX + (32'(w_beat) - FB) * A_WGT + j);
        wb_wr_en[j]  = w_fire && ((32'(w_beat) - FB) * A_WGT + j < TM_POT);
      end
    end
  end

  assign iss_valid = iss;
  assign iss_bank  = ~k[0];          // group k-1 lives in bank (k-1)%2
  assign iss_pair  = KW'(pair);

  logic first_g;
  logic [SW-1:0] slot_g;
  assign first_g = (c.mode == vit_pkg::MODE_FC) ? (cmp_g == 0) : (cmp_c == 0);
  assign slot_g  = (c.mode == vit_pkg::MODE_FC) ? '0 : SW'(cmp_hb);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      eng_valid <= 1'b0;
    end else begin
      eng_valid <= iss;
    end
  end
  always_ff @(posedge clk) begin
    eng_wbank    <= iss_bank;
    eng_tag      <= {obank, first_g, slot_g, KW'(pair)};
    eng_lane_all <= (c.mode == vit_pkg::MODE_MSA);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; st_start <= 1'b0; st_bank <= 1'b0;
      c <= '0; n_tiles <= '0; n_groups <= '0; cph <= '0; tile <= '0; k <= '0;
      in_beats <= '0; n_pairs <= '0; in_head <= '0; w_head <= '0; in_beat <= '0;
      w_beat <= '0; in_done <= 1'b0; w_done <= 1'b0; pair <= '0; cmp_done <= 1'b0;
      cmp_c <= '0; cmp_hb <= '0; cmp_g <= '0; drain <= '0; obank <= 1'b0;
    end else begin
      done     <= 1'b0;
      st_start <= 1'b0;
      // loaders
      if (in_fire) begin
        if (32'(in_beat) + 1 == 32'(in_beats)) begin
          in_beat <= '0;
          if (32'(in_head) == PH - 1) in_done <= 1'b1;
          else in_head <= in_head + 1'b1;
        end else in_beat <= in_beat + 1'b1;
      end
      if (w_fire) begin
        if (32'(w_beat) + 1 == FB + PB) begin
          w_beat <= '0;
          if (32'(w_head) == PH - 1) w_done <= 1'b1;
          else w_head <= w_head + 1'b1;
        end else w_beat <= w_beat + 1'b1;
      end
      if (iss) begin
        if (pair + 1'b1 == n_pairs) cmp_done <= 1'b1;
        else pair <= pair + 1'b1;
      end
      case (state)
        S_IDLE: if (start) begin
          c        <= cfg;
          n_tiles  <= 16'((32'(cfg.m) + TM - 1) / TM);
          n_groups <= 16'(32'(cfg.n) / (PH * TN));
          cph      <= 16'(32'(cfg.n) / (NH * TN));
          in_beats <= 9'((32'(cfg.f) + A_IN - 1) / A_IN);
          n_pairs  <= (KW+1)'((32'(cfg.f) + 1) / 2);
          tile <= '0; k <= '0; obank <= 1'b0;
          state <= S_RUN;
        end
        S_RUN: if (phase_end) begin
          // advance the group counters of the computed group
          if (cmp_act) begin
            cmp_g <= cmp_g + 1'b1;
            if (cmp_c + 1'b1 == cph) begin cmp_c <= '0; cmp_hb <= cmp_hb + 1'b1; end
            else cmp_c <= cmp_c + 1'b1;
          end
          in_done <= 1'b0; w_done <= 1'b0; in_head <= '0; w_head <= '0;
          in_beat <= '0; w_beat <= '0; cmp_done <= 1'b0; pair <= '0;
          if (k == n_groups) begin
            state <= S_DRAIN; drain <= 2'd2;
          end else k <= k + 1'b1;
        end
        S_DRAIN: begin
          if (drain == 0) state <= S_HAND;
          else drain <= drain - 1'b1;
        end
        S_HAND: if (!st_busy) begin
          st_start <= 1'b1;
          st_bank  <= obank;
          obank    <= ~obank;
          k <= '0; cmp_g <= '0; cmp_c <= '0; cmp_hb <= '0;
          if (tile + 1'b1 == n_tiles) state <= S_FIN0;
          else begin tile <= tile + 1'b1; state <= S_RUN; end
        end
        S_FIN0: state <= S_FIN;
        S_FIN: if (!st_busy) begin done <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a group always contains whole heads' channel chunks
  always @(posedge clk) if (state == S_IDLE && start)
    assert (32'(cfg.n) % (NH * TN) == 0 && cfg.f != 0 && 32'(cfg.f) <= F_MAX)
      else $error("unsupported layer shape n=%0d f=%0d", cfg.n, cfg.f);
endmodule
