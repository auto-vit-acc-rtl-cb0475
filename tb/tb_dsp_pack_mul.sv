// tb_dsp_pack_mul: checks the packed DSP multiplier. 4-bit mode: all
// 16^4 operand combinations, four products each. 8-bit mode: random
// operands, two products each. Reference: plain integer products.
module tb_dsp_pack_mul;
  int checks = 0, failures = 0;
  logic signed [3:0] w0, w1, a0, a1;
  logic signed [7:0] p4 [4];
  logic signed [7:0] v0, v1, b0, b1;
  logic signed [15:0] p8 [4];

  dsp_pack_mul #(.B(4)) dut4 (.w0, .w1, .a0, .a1, .p(p4));
  dsp_pack_mul #(.B(8)) dut8 (.w0(v0), .w1(v1), .a0(b0), .a1(b1), .p(p8));

  task automatic chk(int got, int exp_v, string what);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d exp %0d", what, got, exp_v);
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 65536; i++) begin
      w0 = 4'(i); w1 = 4'(i >> 4); a0 = 4'(i >> 8); a1 = 4'(i >> 12);
      #1;
      chk(p4[0], int'(w0) * int'(a0), "w0a0");
      chk(p4[1], int'(w0) * int'(a1), "w0a1");
      chk(p4[2], int'(w1) * int'(a0), "w1a0");
      chk(p4[3], int'(w1) * int'(a1), "w1a1");
    end
    for (int i = 0; i < 20000; i++) begin
      v0 = 8'($urandom); v1 = 8'($urandom); b0 = 8'($urandom); b1 = 8'($urandom);
      if (i < 4) begin v0 = (i & 1) ? -8'sd128 : 8'sd127; b0 = -8'sd128; b1 = (i & 2) ? -8'sd128 : 8'sd127; end
      #1;
      chk(p8[0], int'(v0) * int'(b0), "8b w0a0");
      chk(p8[1], int'(v0) * int'(b1), "8b w0a1");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
