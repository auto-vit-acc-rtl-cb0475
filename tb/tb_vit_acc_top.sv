// tb_vit_acc_top: end-to-end test of the accelerator at reduced tile sizes.
//
// A host model generates random b-bit activations X[N][F] and a weight
// matrix whose rows are Fixed (first TM_FIX rows of each tile) or PoT (the
// rest), streams the tiles in the order the controller expects, and checks
// every output word against an integer reference:
//   FC layer : q[m][f] = sat_b(round(sum_n W[m][n] X[n][f] / 2^rq_shift))
//   MSA layer: per head h, the same sum over that head's channels only
//   residual : sat16(round(sum / 2^res_shift) + skip[m][f])
// It runs layers with full-rate streams (and checks the cycle count
// against the latency model: every phase lasts max(L_in, L_wgt, L_cmpt))
// and with random stalls on all streams, then LayerNorm tokens against a
// real-valued reference. Each mechanism is counted and must occur.
module tb_vit_acc_top;
  localparam int AXI_W = 128, B = 4, TN = 32;
  localparam int TMF = 4, TMP = 2, TM = TMF + TMP;
  localparam int PH = 2, NH = 4, FMAX = 9, AIN = 8, AWG = 4, LNN = 64;
  localparam int D = AXI_W / B;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  logic start = 0, busy, done;
  vit_pkg::layer_cfg_t cfg;
  logic in_valid = 0, in_ready;
  logic [AXI_W-1:0] in_data [AIN];
  logic wgt_valid = 0, wgt_ready;
  logic [AXI_W-1:0] wgt_data [AWG];
  logic skip_valid = 0, skip_ready;
  logic [AXI_W-1:0] skip_data [2];
  logic out_valid, out_ready = 0;
  logic [AXI_W-1:0] out_data [2];
  logic out_tok_ok [2];
  logic [15:0] ln_n_ch;
  logic [4:0]  ln_q_shift;
  logic ln_par_we = 0;
  logic [2:0] ln_par_addr;
  logic [AXI_W-1:0] ln_par_gamma, ln_par_beta;
  logic ln_in_valid = 0, ln_in_ready;
  logic [AXI_W-1:0] ln_in_data;
  logic ln_out_valid, ln_out_ready = 0;
  logic [AXI_W-1:0] ln_out_data;
  logic ln_busy;

  vit_acc_top #(.AXI_W(AXI_W), .B_FIX(B), .B_POT(3), .TM_FIX(TMF), .TM_POT(TMP), .PH(PH), .NH(NH),
                .F_MAX(FMAX), .ACC_W(32), .A_IN(AIN), .A_WGT(AWG), .LN_N_MAX(LNN)) dut (.*);

  // ---------------- layer data ----------------
  int M, N, F, mode_msa, res, rqs, rss;
  int X [512][FMAX];
  int W [64][512];        // decoded weight values
  int Wc [64][512];       // codes as streamed
  int SK [64][FMAX];
  bit stalls;

  // mechanism counters
  int n_fc, n_msa, n_res, n_pot_rows, n_out_bp, n_in_stall, n_load_bound, n_cmpt_bound,
      n_store_wait, n_store_overlap, n_pad_tok, n_ln_tok, n_cycle_chk;

  function automatic int potv(int c);
    int v;
    v = ((c & 3) == 0) ? 0 : (1 << ((c & 3) - 1));
    return (c & 4) ? -v : v;
  endfunction

  function automatic int rshift_round(longint a, int sh);
    return (sh == 0) ? int'(a) : int'((a + (64'sd1 << (sh - 1))) >>> sh);
  endfunction

  task automatic gen_layer(int m, int n, int f, int msa, int r);
    M = m; N = n; F = f; mode_msa = msa; res = r;
    rqs = 3 + $urandom % 3; rss = $urandom % 3;
    for (int i = 0; i < N; i++) for (int t = 0; t < FMAX; t++) X[i][t] = int'($urandom % 15) - 7;
    for (int row = 0; row < 64; row++) for (int i = 0; i < N; i++) begin
      int tr;
      tr = row % TM;
      if (row >= ((M + TM - 1) / TM) * TM || row >= M) begin Wc[row][i] = 0; W[row][i] = 0; end
      else if (tr < TMF) begin Wc[row][i] = int'($urandom % 15) - 7; W[row][i] = Wc[row][i]; end
      else begin Wc[row][i] = $urandom % 8; W[row][i] = potv(Wc[row][i]); end
    end
    for (int row = 0; row < 64; row++) for (int t = 0; t < FMAX; t++) SK[row][t] = int'($urandom % 4000) - 2000;
  endtask

  function automatic int ref_out(int row, int t, int head);
    longint s = 0;
    int lo, hi, v;
    lo = (head < 0) ? 0 : head * (N / NH);
    hi = (head < 0) ? N : lo + N / NH;
    for (int i = lo; i < hi; i++) s += longint'(W[row][i]) * X[i][t];
    if (res) begin
      v = rshift_round(s, rss) + SK[row][t];
      if (v > 32767) v = 32767;
      if (v < -32768) v = -32768;
    end else begin
      v = rshift_round(s, rqs);
      if (v > 7) v = 7;
      if (v < -7) v = -7;
    end
    return v;
  endfunction

  // ---------------- stream drivers ----------------
  task automatic drive_inputs();
    int tiles, G, cph;
    tiles = (M + TM - 1) / TM; G = N / (PH * TN); cph = N / (NH * TN);
    for (int tl = 0; tl < tiles; tl++)
      for (int g = 0; g < G; g++)
        for (int p = 0; p < PH; p++)
          for (int bt = 0; bt < (F + AIN - 1) / AIN; bt++) begin
            int base;
            base = ((g / cph) * PH + p) * (N / NH) + (g % cph) * TN;
            while (stalls && ($urandom % 4 == 0)) @(negedge clk);
            for (int j = 0; j < AIN; j++)
              for (int i = 0; i < TN; i++)
                in_data[j][i*B +: B] = (bt*AIN + j < F) ? 4'(X[base+i][bt*AIN+j]) : 4'(0);
            in_valid = 1;
            @(posedge clk);
            while (!in_ready) @(posedge clk);
            @(negedge clk);
            in_valid = 0;
          end
  endtask

  task automatic drive_weights();
    int tiles, G, cph;
    tiles = (M + TM - 1) / TM; G = N / (PH * TN); cph = N / (NH * TN);
    for (int tl = 0; tl < tiles; tl++)
      for (int g = 0; g < G; g++)
        for (int p = 0; p < PH; p++)
          for (int sec = 0; sec < 2; sec++)
            for (int r0 = 0; r0 < (sec ? TMP : TMF); r0 += AWG) begin
              int base;
              base = ((g / cph) * PH + p) * (N / NH) + (g % cph) * TN;
              while (stalls && ($urandom % 4 == 0)) @(negedge clk);
              for (int j = 0; j < AWG; j++) begin
                int row;
                row = tl * TM + (sec ? TMF : 0) + r0 + j;
                wgt_data[j] = '0;
                for (int i = 0; i < TN; i++)
                  if (sec == 0) wgt_data[j][i*B +: B] = 4'(Wc[row][base+i]);
                  else          wgt_data[j][i*3 +: 3] = 3'(Wc[row][base+i]);
              end
              wgt_valid = 1;
              @(posedge clk);
              while (!wgt_ready) @(posedge clk);
              @(negedge clk);
              wgt_valid = 0;
            end
  endtask

  // output sink and checker; also drives the skip stream in lockstep
  task automatic sink_outputs();
    int tiles, slices, cols, pairs;
    tiles = (M + TM - 1) / TM; slices = mode_msa ? NH : 1;
    cols = res ? (TM + 7) / 8 : (TM + D - 1) / D; pairs = (F + 1) / 2;
    for (int tl = 0; tl < tiles; tl++)
      for (int h = 0; h < slices; h++)
        for (int j = 0; j < cols; j++)
          for (int k = 0; k < pairs; k++) begin
            out_ready = !(stalls && ($urandom % 3 == 0));
            @(posedge clk);
            if (out_valid && !out_ready) n_out_bp++;
            while (!(out_valid && out_ready)) begin
              @(negedge clk);
              out_ready = !(stalls && ($urandom % 3 == 0));
              @(posedge clk);
              if (out_valid && !out_ready) n_out_bp++;
            end
            // compare the beat
            for (int t = 0; t < 2; t++) begin
              checks++;
              if (out_tok_ok[t] != (2*k + t < F)) begin failures++; $display("FAIL tok_ok"); end
              if (2*k + t >= F) begin n_pad_tok++; continue; end
              for (int i = 0; i < (res ? 8 : D); i++) begin
                int ch, row, exp_v, got;
                ch = j * (res ? 8 : D) + i;
                if (ch >= TM) continue;
                row = tl * TM + ch;
                if (row >= M) continue;
                exp_v = ref_out(row, 2*k + t, mode_msa ? h : -1);
                got = res ? int'(signed'(out_data[t][i*16 +: 16])) : int'(signed'(out_data[t][i*B +: B]));
                checks++;
                if (got != exp_v) begin
                  failures++;
                  if (failures < 20) $display("FAIL out tile %0d head %0d row %0d tok %0d got %0d exp %0d", tl, h, row, 2*k+t, got, exp_v);
                end
              end
            end
            @(negedge clk);
            out_ready = 0;
          end
  endtask

  // skip stream: same order as the output beats, own handshake
  task automatic drive_skip();
    int tiles, cols, pairs;
    if (!res) return;
    tiles = (M + TM - 1) / TM; cols = (TM + 7) / 8; pairs = (F + 1) / 2;
    for (int tl = 0; tl < tiles; tl++)
      for (int j = 0; j < cols; j++)
        for (int k = 0; k < pairs; k++) begin
          while (stalls && ($urandom % 4 == 0)) @(negedge clk);
          for (int t = 0; t < 2; t++) begin
            skip_data[t] = '0;
            for (int i = 0; i < 8; i++) begin
              int row;
              row = tl * TM + j * 8 + i;
              if (j * 8 + i < TM && 2*k + t < F) skip_data[t][i*16 +: 16] = 16'(SK[row][2*k+t]);
            end
          end
          skip_valid = 1;
          @(posedge clk);
          while (!skip_ready) @(posedge clk);
          @(negedge clk);
          skip_valid = 0;
        end
  endtask

  // mechanism monitors
  always @(posedge clk) if (rst_n) begin
    if (in_valid && !in_ready) n_in_stall++;
    if (dut.u_ctrl.phase_end && dut.u_ctrl.load_act && dut.u_ctrl.cmp_act) begin
      if (dut.u_ctrl.cmp_done) n_load_bound++;
      if (dut.u_ctrl.in_done && dut.u_ctrl.w_done) n_cmpt_bound++;
    end
    if (dut.u_ctrl.state == 3'd3 && st_busy_w) n_store_wait++;
    if (dut.u_ctrl.state == 3'd1 && st_busy_w) n_store_overlap++;
  end
  wire st_busy_w = dut.u_store.busy;

  // paper latency model for a full-rate layer (A_out = 2 tokens per beat)
  function automatic longint model_cycles();
    longint lin, lwgt, lcmpt, l1, lout, l2, G, tiles;
    lin   = PH * ((F + AIN - 1) / AIN);
    lwgt  = PH * ((TMF + AWG - 1) / AWG + (TMP + AWG - 1) / AWG);
    lcmpt = (F + 1) / 2;
    l1    = (lin > lwgt) ? lin : lwgt; l1 = (l1 > lcmpt) ? l1 : lcmpt;
    lout  = (mode_msa ? NH : 1) * ((TM + D - 1) / D) * ((F + 1) / 2);
    G     = N / (PH * TN);
    tiles = (M + TM - 1) / TM;
    l2    = l1 * G + lcmpt; l2 = (l2 > lout) ? l2 : lout;
    return tiles * l2 + lout;
  endfunction

  // lower bound: the compute of all tiles cannot overlap itself, nor can
  // the stores of all tiles; the model above counts the last store in full
  // even when it overlaps nothing, so it is only an upper bound.
  function automatic longint model_floor();
    longint lcmpt, lout, G, tiles, a, b;
    lcmpt = (F + 1) / 2;
    lout  = (mode_msa ? NH : 1) * ((TM + D - 1) / D) * ((F + 1) / 2);
    G     = N / (PH * TN);
    tiles = (M + TM - 1) / TM;
    a = tiles * G * lcmpt; b = tiles * lout;
    return (a > b) ? a : b;
  endfunction

  task automatic run_layer(int m, int n, int f, int msa, int r, bit st);
    longint t0, t1, mdl;
    gen_layer(m, n, f, msa, r);
    stalls = st;
    if (msa) n_msa++; else n_fc++;
    if (r) n_res++;
    for (int row = 0; row < M; row++) if (row % TM >= TMF) n_pot_rows++;
    cfg = '0;
    cfg.m = 16'(m); cfg.n = 16'(n); cfg.f = 9'(f);
    cfg.mode = msa ? vit_pkg::MODE_MSA : vit_pkg::MODE_FC;
    cfg.rq_shift = 5'(rqs); cfg.res_en = 1'(r); cfg.res_shift = 5'(rss);
    @(negedge clk);
    start = 1;
    t0 = cyc;
    @(negedge clk);
    start = 0;
    if (0) $display("layer start M=%0d N=%0d F=%0d msa=%0d res=%0d", m, n, f, msa, r);
    fork
      drive_inputs();
      drive_weights();
      sink_outputs();
      drive_skip();
    join
    while (!done) @(posedge clk);
    t1 = cyc;
    if (0) $display("layer done M=%0d N=%0d F=%0d msa=%0d res=%0d stalls=%0d at cycle %0d", m, n, f, msa, r, st, t1);
    @(negedge clk);
    if (!st && !r) begin
      mdl = model_cycles();
      checks++; n_cycle_chk++;
      $display("layer M=%0d N=%0d F=%0d msa=%0d: %0d cycles, latency model %0d", m, n, f, msa, t1 - t0, mdl);
      if (t1 - t0 > mdl + 6 * ((m + TM - 1) / TM) + 6 || t1 - t0 < model_floor()) begin
        failures++; $display("FAIL cycle count outside model bounds");
      end
    end
  endtask

  // ---------------- LayerNorm ----------------
  task automatic run_ln(int ntok);
    real g [LNN], bt [LNN];
    ln_n_ch = 16'(LNN); ln_q_shift = 5'd6;
    for (int w = 0; w < LNN / 8; w++) begin
      @(negedge clk);
      ln_par_we = 1; ln_par_addr = 3'(w);
      for (int i = 0; i < 8; i++) begin
        int gi, bi;
        gi = 128 + int'($urandom % 256);     // gamma in [0.5, 1.5)
        bi = int'($urandom % 256) - 128;     // beta in [-0.5, 0.5)
        ln_par_gamma[i*16 +: 16] = 16'(gi); ln_par_beta[i*16 +: 16] = 16'(bi);
        g[w*8+i] = gi / 256.0; bt[w*8+i] = bi / 256.0;
      end
    end
    @(negedge clk);
    ln_par_we = 0;
    for (int tk = 0; tk < ntok; tk++) begin
      real xv [LNN];
      real mu, va, yv;
      int  xi [LNN];
      mu = 0; va = 0;
      for (int i = 0; i < LNN; i++) begin
        xi[i] = int'($urandom % 2048) - 1024 + ((tk % 2) ? 700 : 0);
        xv[i] = xi[i] / 256.0; mu += xv[i];
      end
      mu /= LNN;
      for (int i = 0; i < LNN; i++) va += (xv[i] - mu) * (xv[i] - mu);
      va /= LNN;
      for (int w = 0; w < LNN / 8; w++) begin
        for (int i = 0; i < 8; i++) ln_in_data[i*16 +: 16] = 16'(xi[w*8+i]);
        ln_in_valid = 1;
        @(posedge clk);
        while (!ln_in_ready) @(posedge clk);
        @(negedge clk);
        ln_in_valid = 0;
      end
      for (int w = 0; w < LNN / D; w++) begin
        ln_out_ready = 1;
        @(posedge clk);
        while (!ln_out_valid) @(posedge clk);
        for (int i = 0; i < D; i++) begin
          int c, got, e;
          c = w * D + i;
          yv = (xv[c] - mu) / $sqrt(va) * g[c] + bt[c];
          e = $rtoi($floor(yv * 256.0 / 64.0 + 0.5));
          if (e > 7) e = 7;
          if (e < -7) e = -7;
          got = int'(signed'(ln_out_data[i*B +: B]));
          checks++;
          if (got - e > 1 || e - got > 1) begin
            failures++;
            if (failures < 20) $display("FAIL LN tok %0d ch %0d got %0d exp %0d (y=%f)", tk, c, got, e, yv);
          end
        end
        @(negedge clk);
        ln_out_ready = 0;
      end
      n_ln_tok++;
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired: ctrl state %0d tile %0d phase %0d ln state %0d in_valid %0d in_ready %0d wgt_valid %0d wgt_ready %0d out_valid %0d",
             dut.u_ctrl.state, dut.u_ctrl.tile, dut.u_ctrl.k, dut.u_ln.state, in_valid, in_ready, wgt_valid, wgt_ready, out_valid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < AIN; j++) in_data[j] = '0;
    for (int j = 0; j < AWG; j++) wgt_data[j] = '0;
    skip_data[0] = '0; skip_data[1] = '0;
    ln_n_ch = 16'(LNN); ln_q_shift = 0; ln_par_addr = 0; ln_par_gamma = '0; ln_par_beta = '0; ln_in_data = '0;
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // full-rate layers: latency checked against the model
    run_layer(12, 128, 7, 0, 0, 0);    // FC, 2 tiles, 1 group
    run_layer(10, 256, 9, 0, 0, 0);    // FC, padded rows, 2 groups
    run_layer(6, 256, 8, 1, 0, 0);     // MSA, 4 head slices, 2 chunks per head
    run_layer(2, 128, 3, 0, 0, 0);     // short tokens: load-bound phases
    run_layer(18, 128, 9, 1, 0, 0);    // MSA, 3 tiles: store longer than compute
    run_layer(12, 512, 9, 0, 0, 0);    // FC, 4 groups: compute-bound phases
    // stalls on every stream
    run_layer(12, 256, 9, 0, 0, 1);
    run_layer(12, 256, 5, 1, 0, 1);
    run_layer(12, 128, 7, 0, 1, 1);    // residual add
    run_layer(6, 256, 6, 0, 1, 0);
    run_ln(4);
    $display("mechanisms: fc=%0d msa=%0d residual=%0d pot_rows=%0d out_backpressure=%0d in_stall=%0d load_bound=%0d compute_bound=%0d store_wait=%0d store_overlap=%0d pad_tokens=%0d ln_tokens=%0d cycle_checks=%0d",
             n_fc, n_msa, n_res, n_pot_rows, n_out_bp, n_in_stall, n_load_bound, n_cmpt_bound, n_store_wait,
             n_store_overlap, n_pad_tok, n_ln_tok, n_cycle_chk);
    if (n_fc == 0 || n_msa == 0 || n_res == 0 || n_pot_rows == 0 || n_out_bp == 0 || n_in_stall == 0 ||
        n_load_bound == 0 || n_cmpt_bound == 0 || n_store_wait == 0 || n_store_overlap == 0 ||
        n_pad_tok == 0 || n_ln_tok == 0 || n_cycle_chk == 0) begin
      failures++; $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
