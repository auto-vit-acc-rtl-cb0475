// tb_pot_shift_mul: exhaustive check of the PoT shift multiplier for the
// 4-bit activation / 3-bit PoT weight configuration against an integer
// reference (weight value = 0 for exponent code 0, else +-2^(code-1)).
module tb_pot_shift_mul;
  int checks = 0, failures = 0;
  logic signed [3:0] act;
  logic        [2:0] wgt;
  logic signed [7:0] prod;
  pot_shift_mul #(.A_W(4), .W_W(3)) dut (.act, .wgt, .prod);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = -8; a < 8; a++)
      for (int w = 0; w < 8; w++) begin
        int e, v, exp_p;
        act = 4'(a); wgt = 3'(w);
        #1;
        e = w & 3;
        v = (e == 0) ? 0 : (1 << (e - 1));
        if (w[2]) v = -v;
        exp_p = a * v;
        checks++;
        if (int'(prod) != exp_p) begin
          failures++;
          $display("FAIL act=%0d code=%0d got %0d exp %0d", a, w, prod, exp_p);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
