// tb_input_tile_buf: fills both banks with random words through the A_IN
// write ports, then reads every token pair of every head back and checks
// the one-cycle read latency and the bank separation.
module tb_input_tile_buf;
  localparam int PH = vit_pkg::PH, A_IN = vit_pkg::A_IN, F = vit_pkg::F_MAX;
  localparam int PAIRS = (F + 1) / 2, W = 128;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en [A_IN];
  logic wr_bank [A_IN];
  logic [1:0] wr_head [A_IN];
  logic [7:0] wr_tok [A_IN];
  logic [W-1:0] wr_data [A_IN];
  logic rd_en, rd_bank;
  logic [6:0] rd_pair;
  logic [W-1:0] rd0 [PH];
  logic [W-1:0] rd1 [PH];
  logic [W-1:0] ref_mem [2][PH][2*PAIRS];

  input_tile_buf dut (.clk, .wr_en, .wr_bank, .wr_head, .wr_tok, .wr_data, .rd_en, .rd_bank, .rd_pair, .rd0, .rd1);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_en = 0; rd_bank = 0; rd_pair = 0;
    for (int j = 0; j < A_IN; j++) begin wr_en[j] = 0; wr_bank[j] = 0; wr_head[j] = 0; wr_tok[j] = 0; wr_data[j] = '0; end
    for (int b = 0; b < 2; b++)
      for (int p = 0; p < PH; p++)
        for (int t = 0; t < 2*PAIRS; t += A_IN) begin
          @(negedge clk);
          for (int j = 0; j < A_IN; j++) begin
            wr_en[j] = (t + j < 2*PAIRS); wr_bank[j] = 1'(b); wr_head[j] = 2'(p); wr_tok[j] = 8'(t + j);
            wr_data[j] = {$urandom, $urandom, $urandom, $urandom};
            if (t + j < 2*PAIRS) ref_mem[b][p][t+j] = wr_data[j];
          end
        end
    @(negedge clk);
    for (int j = 0; j < A_IN; j++) wr_en[j] = 0;
    for (int b = 0; b < 2; b++)
      for (int k = 0; k < PAIRS; k++) begin
        @(negedge clk);
        rd_en = 1; rd_bank = 1'(b); rd_pair = 7'(k);
        @(negedge clk);
        rd_en = 0;
        for (int p = 0; p < PH; p++) begin
          checks++;
          if (rd0[p] != ref_mem[b][p][2*k] || rd1[p] != ref_mem[b][p][2*k+1]) begin
            failures++;
            if (failures < 10) $display("FAIL bank %0d head %0d pair %0d", b, p, k);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
