// tb_tile_controller: runs the controller alone at default parameters with
// always-valid streams and a store model that stays busy for L_out cycles.
// Checks per phase: the cycle count equals max(L_in, L_wgt, L_cmpt) of the
// work in that phase; per layer: the number of input writes (P_h*F per
// group), weight row writes (P_h*T_m per group), token-pair issues
// (ceil(F/2) per group), store hand-overs (one per tile), the first flags
// (FC: group 0; MSA: chunk 0 of each head) and the done pulse.
module tb_tile_controller;
  localparam int PH = vit_pkg::PH, NH = vit_pkg::NH, TN = vit_pkg::TN, TM = vit_pkg::TM;
  localparam int AIN = vit_pkg::A_IN, AWG = vit_pkg::A_WGT;
  localparam int FB = (vit_pkg::TM_FIX + AWG - 1) / AWG, PB = (vit_pkg::TM_POT + AWG - 1) / AWG;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done;
  vit_pkg::layer_cfg_t cfg;
  logic in_valid = 1, in_ready, wgt_valid = 1, wgt_ready;
  logic ib_wr_en [AIN];
  logic ib_wr_bank;
  logic [1:0] ib_wr_head;
  logic [7:0] ib_wr_tok [AIN];
  logic wb_wr_en [AWG];
  logic wb_wr_bank;
  logic [1:0] wb_wr_head;
  logic [5:0] wb_wr_row [AWG];
  logic iss_valid, iss_bank;
  logic [6:0] iss_pair;
  logic eng_valid, eng_wbank, eng_lane_all;
  logic [10:0] eng_tag;
  logic st_start, st_bank, st_busy;
  int st_cnt = 0, st_len = 10;
  assign st_busy = (st_cnt != 0);
  always @(posedge clk) if (st_start) st_cnt <= st_len; else if (st_cnt != 0) st_cnt <= st_cnt - 1;

  tile_controller dut (.*);

  int n_in, n_w, n_iss, n_st, n_first, phase_len, n_phase_ok, n_phase;
  always @(posedge clk) if (rst_n) begin
    for (int j = 0; j < AIN; j++) if (ib_wr_en[j]) n_in++;
    for (int j = 0; j < AWG; j++) if (wb_wr_en[j]) n_w++;
    if (iss_valid) n_iss++;
    if (st_start) n_st++;
    if (eng_valid && eng_tag[9] && eng_tag[6:0] == 0) n_first++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int m, int n, int f, bit msa);
    int G, tiles, cph, lin, lwgt, lcmpt, plen, k_prev;
    G = n / (PH * TN); tiles = (m + TM - 1) / TM; cph = n / (NH * TN);
    lin = PH * ((f + AIN - 1) / AIN); lwgt = PH * (FB + PB); lcmpt = (f + 1) / 2;
    st_len = (msa ? NH : 1) * ((TM + 31) / 32) * ((f + 1) / 2);
    n_in = 0; n_w = 0; n_iss = 0; n_st = 0; n_first = 0;
    cfg = '0; cfg.m = 16'(m); cfg.n = 16'(n); cfg.f = 9'(f);
    cfg.mode = msa ? vit_pkg::MODE_MSA : vit_pkg::MODE_FC;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    plen = 0;
    while (!done) begin
      @(posedge clk);
      if (dut.state == 1) plen++;
      if (dut.phase_end) begin
        int e, k;
        k = dut.k;
        e = 0;
        if (k < G) e = (lin > lwgt) ? lin : lwgt;
        if (k > 0) e = (e > lcmpt) ? e : lcmpt;
        checks++;
        if (plen != e) begin failures++; $display("FAIL phase %0d length %0d expected %0d", k, plen, e); end
        plen = 0;
      end
    end
    checks += 5;
    if (n_in != tiles * G * PH * f) begin failures++; $display("FAIL input writes %0d", n_in); end
    if (n_w != tiles * G * PH * TM) begin failures++; $display("FAIL weight writes %0d", n_w); end
    if (n_iss != tiles * G * ((f + 1) / 2)) begin failures++; $display("FAIL issues %0d", n_iss); end
    if (n_st != tiles) begin failures++; $display("FAIL store hand-overs %0d", n_st); end
    if (n_first != tiles * (msa ? (G / cph) : 1)) begin failures++; $display("FAIL first flags %0d", n_first); end
    @(negedge clk);
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(80, 768, 197, 0);    // DeiT-base projection-sized FC, 2 tiles
    run(40, 768, 197, 1);    // MSA
    run(120, 1536, 20, 0);   // load-bound phases
    run(40, 384, 3, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
