// tb_layernorm_unit: LayerNorm of random 16-bit tokens with the DeiT-base
// (768) and DeiT-small (384) widths, compared with a real-valued reference
// (mean, population variance, gamma, beta, then /2^q_shift, rounding and
// saturation to 4 bits); results may differ by one LSB from fixed-point
// rounding. Also checks that every token produces N/D output words.
// The tolerance and the Q8.8 data format are this test's choices; the
// reference follows the usual LayerNorm definition with 16-bit data.
module tb_layernorm_unit;
  localparam int NMAX = 768, B = 4, D = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [15:0] n_ch;
  logic [4:0] q_shift;
  logic par_we = 0;
  logic [6:0] par_addr;
  logic [127:0] par_gamma, par_beta;
  logic in_valid = 0, in_ready;
  logic [127:0] in_data;
  logic out_valid, out_ready = 0;
  logic [127:0] out_data;
  logic busy;
  real g [NMAX], bt [NMAX];

  layernorm_unit dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int n, int ntok, int qs);
    n_ch = 16'(n); q_shift = 5'(qs);
    for (int w = 0; w < n / 8; w++) begin
      @(negedge clk);
      par_we = 1; par_addr = 7'(w);
      for (int i = 0; i < 8; i++) begin
        int gi, bi;
        gi = 64 + int'($urandom % 448); bi = int'($urandom % 512) - 256;
        par_gamma[i*16 +: 16] = 16'(gi); par_beta[i*16 +: 16] = 16'(bi);
        g[w*8+i] = gi / 256.0; bt[w*8+i] = bi / 256.0;
      end
    end
    @(negedge clk); par_we = 0;
    for (int tk = 0; tk < ntok; tk++) begin
      real xv [NMAX];
      real mu, va;
      int xi [NMAX];
      int spread;
      spread = 256 << (tk % 4);
      mu = 0; va = 0;
      for (int i = 0; i < n; i++) begin
        xi[i] = int'($urandom % (2 * spread)) - spread + ((tk - 2) * 97);
        xv[i] = xi[i] / 256.0; mu += xv[i];
      end
      mu /= n;
      for (int i = 0; i < n; i++) va += (xv[i] - mu) * (xv[i] - mu);
      va /= n;
      for (int w = 0; w < n / 8; w++) begin
        for (int i = 0; i < 8; i++) in_data[i*16 +: 16] = 16'(xi[w*8+i]);
        in_valid = 1;
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        @(negedge clk);
        in_valid = 0;
      end
      for (int w = 0; w < n / D; w++) begin
        out_ready = 1;
        @(posedge clk);
        while (!out_valid) @(posedge clk);
        for (int i = 0; i < D; i++) begin
          int c, got, e;
          real yv;
          c = w * D + i;
          yv = (xv[c] - mu) / $sqrt(va) * g[c] + bt[c];
          e = $rtoi($floor(yv * 256.0 / (1 << qs) + 0.5));
          if (e > 7) e = 7;
          if (e < -7) e = -7;
          got = int'(signed'(out_data[i*B +: B]));
          checks++;
          if (got - e > 1 || e - got > 1) begin
            failures++;
            if (failures < 20) $display("FAIL n=%0d tok %0d ch %0d got %0d exp %0d", n, tk, c, got, e);
          end
        end
        @(negedge clk);
        out_ready = 0;
      end
      checks++;
      repeat (2) @(negedge clk);
      if (busy) begin failures++; $display("FAIL busy after token"); end
    end
  endtask

  initial begin
    n_ch = 16'd768; q_shift = 0; par_addr = 0; par_gamma = '0; par_beta = '0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(768, 4, 6);
    run(384, 4, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
