// tb_out_quant: random accumulators, shifts and skip values in both modes,
// compared with a reference that rounds half up and saturates to the
// symmetric b-bit range or to 16 bits after the skip addition.
module tb_out_quant;
  int checks = 0, failures = 0;
  logic signed [31:0] acc;
  logic res_en;
  logic [4:0] rq_shift, res_shift;
  logic signed [15:0] skip, q;

  out_quant dut (.acc, .res_en, .rq_shift, .res_shift, .skip, .q);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 20000; i++) begin
      longint a, sc, e;
      int sh;
      acc = $signed($urandom) >>> ($urandom % 28);
      res_en = 1'(i % 2);
      rq_shift = 5'($urandom % 12); res_shift = 5'($urandom % 12);
      skip = 16'($urandom);
      #1;
      a = acc;
      sh = res_en ? res_shift : rq_shift;
      sc = (sh == 0) ? a : ((a + (64'sd1 << (sh - 1))) >>> sh);
      if (res_en) begin
        e = sc + longint'(skip);
        if (e > 32767) e = 32767;
        if (e < -32768) e = -32768;
      end else begin
        e = sc;
        if (e > 7) e = 7;
        if (e < -7) e = -7;
      end
      checks++;
      if (longint'(q) != e) begin
        failures++;
        if (failures < 10) $display("FAIL acc=%0d res=%0d sh=%0d skip=%0d got %0d exp %0d", acc, res_en, sh, skip, q, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
