// tb_head_lane: random activations and weight tiles into one head lane at
// the default tile size; every dot product of both tokens is compared with
// an integer reference that decodes Fixed and PoT weights itself.
module tb_head_lane;
  localparam int TN = vit_pkg::TN, TMF = vit_pkg::TM_FIX, TMP = vit_pkg::TM_POT;
  localparam int TM = TMF + TMP;
  localparam int SUM_W = 2*4 + $clog2(TN) + 1;
  int checks = 0, failures = 0;
  logic signed [3:0] act0 [TN];
  logic signed [3:0] act1 [TN];
  logic signed [3:0] wfix [TMF][TN];
  logic        [2:0] wpot [TMP][TN];
  logic signed [SUM_W-1:0] sum0 [TM];
  logic signed [SUM_W-1:0] sum1 [TM];

  head_lane dut (.act0, .act1, .wfix, .wpot, .sum0, .sum1);

  function automatic int potv(logic [2:0] c);
    int v;
    v = (c[1:0] == 0) ? 0 : (1 << (c[1:0] - 1));
    return c[2] ? -v : v;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 40; it++) begin
      for (int n = 0; n < TN; n++) begin
        act0[n] = 4'($urandom); act1[n] = 4'($urandom);
        if (it == 0) begin act0[n] = -4'sd8; act1[n] = 4'sd7; end
        for (int m = 0; m < TMF; m++) wfix[m][n] = (it == 0) ? -4'sd8 : 4'($urandom);
        for (int m = 0; m < TMP; m++) wpot[m][n] = (it == 0) ? 3'b111 : 3'($urandom);
      end
      #1;
      for (int m = 0; m < TM; m++) begin
        int e0, e1;
        e0 = 0; e1 = 0;
        for (int n = 0; n < TN; n++) begin
          int w;
          w = (m < TMF) ? int'(wfix[m][n]) : potv(wpot[m-TMF][n]);
          e0 += w * int'(act0[n]);
          e1 += w * int'(act1[n]);
        end
        checks += 2;
        if (int'(sum0[m]) != e0 || int'(sum1[m]) != e1) begin
          failures++;
          if (failures < 10) $display("FAIL it=%0d m=%0d got %0d/%0d exp %0d/%0d", it, m, sum0[m], sum1[m], e0, e1);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
