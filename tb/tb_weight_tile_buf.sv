// tb_weight_tile_buf: writes random Fixed and PoT rows into both banks of
// all heads through the A_WGT ports and checks every weight of the
// selected bank against the written words.
module tb_weight_tile_buf;
  localparam int PH = vit_pkg::PH, AW = vit_pkg::A_WGT, TN = vit_pkg::TN;
  localparam int TMF = vit_pkg::TM_FIX, TMP = vit_pkg::TM_POT, TM = TMF + TMP;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en [AW];
  logic wr_bank [AW];
  logic [1:0] wr_head [AW];
  logic [5:0] wr_row [AW];
  logic [127:0] wr_data [AW];
  logic rd_bank;
  logic signed [3:0] wfix [PH][TMF][TN];
  logic        [2:0] wpot [PH][TMP][TN];
  logic [127:0] ref_row [2][PH][TM];

  weight_tile_buf dut (.clk, .wr_en, .wr_bank, .wr_head, .wr_row, .wr_data, .rd_bank, .wfix, .wpot);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_bank = 0;
    for (int j = 0; j < AW; j++) begin wr_en[j] = 0; wr_bank[j] = 0; wr_head[j] = 0; wr_row[j] = 0; wr_data[j] = '0; end
    for (int b = 0; b < 2; b++)
      for (int p = 0; p < PH; p++)
        for (int r = 0; r < TM; r += AW) begin
          @(negedge clk);
          for (int j = 0; j < AW; j++) begin
            wr_en[j] = (r + j < TM); wr_bank[j] = 1'(b); wr_head[j] = 2'(p); wr_row[j] = 6'(r + j);
            wr_data[j] = {$urandom, $urandom, $urandom, $urandom};
            if (r + j < TM) ref_row[b][p][r+j] = wr_data[j];
          end
        end
    @(negedge clk);
    for (int j = 0; j < AW; j++) wr_en[j] = 0;
    for (int b = 0; b < 2; b++) begin
      rd_bank = 1'(b);
      #1;
      for (int p = 0; p < PH; p++)
        for (int m = 0; m < TM; m++)
          for (int n = 0; n < TN; n++) begin
            checks++;
            if (m < TMF) begin
              if (wfix[p][m][n] != ref_row[b][p][m][n*4 +: 4]) failures++;
            end else begin
              if (wpot[p][m-TMF][n] != ref_row[b][p][m][n*3 +: 3]) failures++;
            end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
