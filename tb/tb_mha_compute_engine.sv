// tb_mha_compute_engine: random token pairs and weight tiles in FC and in
// MSA mode. Checks the per-lane results (MSA), the sum over lanes (FC, lanes
// 1.. read zero), the tag and the one-cycle latency.
module tb_mha_compute_engine;
  localparam int TN = vit_pkg::TN, TMF = vit_pkg::TM_FIX, TMP = vit_pkg::TM_POT;
  localparam int TM = TMF + TMP, PH = vit_pkg::PH, ACC_W = vit_pkg::ACC_W;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  vit_pkg::layer_mode_e mode;
  logic [15:0] in_tag, out_tag;
  logic signed [3:0] act0 [PH][TN];
  logic signed [3:0] act1 [PH][TN];
  logic signed [3:0] wfix [PH][TMF][TN];
  logic        [2:0] wpot [PH][TMP][TN];
  logic signed [ACC_W-1:0] res0 [PH][TM];
  logic signed [ACC_W-1:0] res1 [PH][TM];
  int e0 [PH][TM];
  int e1 [PH][TM];

  mha_compute_engine dut (.clk, .rst_n, .in_valid, .mode, .in_tag, .act0, .act1, .wfix, .wpot,
                          .out_valid, .out_tag, .res0, .res1);

  function automatic int potv(logic [2:0] c);
    int v;
    v = (c[1:0] == 0) ? 0 : (1 << (c[1:0] - 1));
    return c[2] ? -v : v;
  endfunction

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mode = vit_pkg::MODE_FC; in_tag = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 20; it++) begin
      @(negedge clk);
      mode = (it % 2) ? vit_pkg::MODE_MSA : vit_pkg::MODE_FC;
      in_tag = 16'(it * 77);
      for (int p = 0; p < PH; p++)
        for (int n = 0; n < TN; n++) begin
          act0[p][n] = 4'($urandom); act1[p][n] = 4'($urandom);
          for (int m = 0; m < TMF; m++) wfix[p][m][n] = 4'($urandom);
          for (int m = 0; m < TMP; m++) wpot[p][m][n] = 3'($urandom);
        end
      for (int p = 0; p < PH; p++)
        for (int m = 0; m < TM; m++) begin
          e0[p][m] = 0; e1[p][m] = 0;
          for (int n = 0; n < TN; n++) begin
            int w;
            w = (m < TMF) ? int'(wfix[p][m][n]) : potv(wpot[p][m-TMF][n]);
            e0[p][m] += w * int'(act0[p][n]);
            e1[p][m] += w * int'(act1[p][n]);
          end
        end
      if (mode == vit_pkg::MODE_FC)
        for (int m = 0; m < TM; m++) begin
          for (int p = 1; p < PH; p++) begin
            e0[0][m] += e0[p][m]; e1[0][m] += e1[p][m];
            e0[p][m] = 0; e1[p][m] = 0;
          end
        end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || out_tag != 16'(it * 77)) begin
        failures++; $display("FAIL latency/tag it=%0d", it);
      end
      for (int p = 0; p < PH; p++)
        for (int m = 0; m < TM; m++) begin
          checks++;
          if (int'(res0[p][m]) != e0[p][m] || int'(res1[p][m]) != e1[p][m]) begin
            failures++;
            if (failures < 10) $display("FAIL it=%0d p=%0d m=%0d got %0d exp %0d", it, p, m, res0[p][m], e0[p][m]);
          end
        end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("FAIL out_valid held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
