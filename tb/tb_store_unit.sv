// tb_store_unit: the store unit reads a behavioural output buffer (random
// accumulators, registered read like the real buffer) and must emit every
// word in order, quantised (normal mode, FC and MSA) or as 16-bit values
// plus the skip input (residual mode), under random back-pressure.
// Also checks one beat per cycle when the sink is always ready.
module tb_store_unit;
  localparam int TMF = 4, TMP = 2, TM = 6, PH = 2, NH = 4, F = 7, PAIRS = 4, SLOTS = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, bank, busy;
  vit_pkg::layer_cfg_t cfg;
  logic rd_en, rd_bank;
  logic [0:0] rd_lane, rd_slot;
  logic [1:0] rd_pair;
  logic signed [31:0] rd0 [TM];
  logic signed [31:0] rd1 [TM];
  logic skip_valid = 0, skip_ready;
  logic [127:0] skip_data [2];
  logic out_valid, out_ready = 0;
  logic [127:0] out_data [2];
  logic out_tok_ok [2];
  int mem [2][PH][SLOTS][PAIRS][2][TM];
  int sk [2][PAIRS][2][8];

  store_unit #(.TM_FIX(TMF), .TM_POT(TMP), .PH(PH), .NH(NH), .F_MAX(F)) dut (.*);

  always @(posedge clk) if (rd_en)
    for (int m = 0; m < TM; m++) begin
      rd0[m] <= mem[rd_bank][rd_lane][rd_slot][rd_pair][0][m];
      rd1[m] <= mem[rd_bank][rd_lane][rd_slot][rd_pair][1][m];
    end

  function automatic int rq(int a, int sh, bit res, int s);
    longint v;
    v = (sh == 0) ? a : ((longint'(a) + (64'sd1 << (sh - 1))) >>> sh);
    if (res) begin
      v += s;
      if (v > 32767) v = 32767;
      if (v < -32768) v = -32768;
    end else begin
      if (v > 7) v = 7;
      if (v < -7) v = -7;
    end
    return int'(v);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc_first, cyc_last;
  task automatic run(bit msa, bit res, bit bp, int b, int f);
    int slices, cols;
    slices = msa ? NH : 1; cols = res ? 1 : 1;
    for (int bb = 0; bb < 2; bb++) for (int p = 0; p < PH; p++) for (int s = 0; s < SLOTS; s++)
      for (int k = 0; k < PAIRS; k++) for (int t = 0; t < 2; t++) for (int m = 0; m < TM; m++)
        mem[bb][p][s][k][t][m] = $signed($urandom) >>> (14 + $urandom % 8);
    cfg = '0; cfg.f = 9'(f); cfg.mode = msa ? vit_pkg::MODE_MSA : vit_pkg::MODE_FC;
    cfg.rq_shift = 5'(4 + $urandom % 4); cfg.res_en = res; cfg.res_shift = 5'($urandom % 4);
    @(negedge clk); start = 1; bank = 1'(b); @(negedge clk); start = 0;
    fork
      begin : skip_drv
        if (res)
          for (int k = 0; k < (f + 1) / 2; k++) begin
            for (int t = 0; t < 2; t++) for (int i = 0; i < 8; i++) begin
              sk[b][k][t][i] = int'($urandom % 20000) - 10000;
              skip_data[t][i*16 +: 16] = 16'(sk[b][k][t][i]);
            end
            skip_valid = 1;
            @(posedge clk);
            while (!skip_ready) @(posedge clk);
            @(negedge clk);
            skip_valid = 0;
          end
      end
      begin : sink
        for (int h = 0; h < slices; h++) for (int k = 0; k < (f + 1) / 2; k++) begin
          out_ready = !(bp && $urandom % 2);
          @(posedge clk);
          while (!(out_valid && out_ready)) begin @(negedge clk); out_ready = !(bp && $urandom % 2); @(posedge clk); end
          if (h == 0 && k == 0) cyc_first = $time / 10;
          cyc_last = $time / 10;
          for (int t = 0; t < 2; t++) begin
            checks++;
            if (out_tok_ok[t] != (2*k + t < f)) failures++;
            for (int m = 0; m < TM; m++) begin
              int lane, slot, e, g;
              lane = msa ? h % PH : 0; slot = msa ? h / PH : 0;
              e = rq(mem[b][lane][slot][k][t][m], res ? cfg.res_shift : cfg.rq_shift, res, res ? sk[b][k][t][m] : 0);
              g = res ? int'(signed'(out_data[t][m*16 +: 16])) : int'(signed'(out_data[t][m*4 +: 4]));
              checks++;
              if (g != e) begin
                failures++;
                if (failures < 10) $display("FAIL msa=%0d res=%0d h=%0d k=%0d t=%0d m=%0d got %0d exp %0d", msa, res, h, k, t, m, g, e);
              end
            end
          end
          @(negedge clk);
          out_ready = 0;
        end
      end
    join
    if (!bp) begin
      checks++;
      if (cyc_last - cyc_first != slices * ((f + 1) / 2) - 1) begin
        failures++; $display("FAIL store rate: %0d cycles for %0d beats", cyc_last - cyc_first + 1, slices * ((f + 1) / 2));
      end
    end
    while (busy) @(negedge clk);
  endtask

  initial begin
    cfg = '0; bank = 0; skip_data[0] = '0; skip_data[1] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0, 0, 0, 0, 7);
    run(1, 0, 1, 1, 7);
    run(0, 1, 1, 1, 6);
    run(1, 0, 0, 0, 5);
    run(0, 1, 0, 0, 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
