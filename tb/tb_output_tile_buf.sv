// tb_output_tile_buf: random accumulate sequences (first/accumulate, lane
// enables, banks, slots, pairs) mirrored in an integer model, then every
// entry read back through the store port with its one-cycle latency.
module tb_output_tile_buf;
  localparam int PH = 2, NH = 4, F = 6, TMF = 2, TMP = 2, TM = 4;
  localparam int SLOTS = NH / PH, PAIRS = (F + 1) / 2;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic acc_en, acc_bank, acc_first;
  logic acc_lane_en [PH];
  logic [0:0] acc_slot;
  logic [1:0] acc_pair;
  logic signed [31:0] acc0 [PH][TM];
  logic signed [31:0] acc1 [PH][TM];
  logic rd_en, rd_bank;
  logic [0:0] rd_lane, rd_slot;
  logic [1:0] rd_pair;
  logic signed [31:0] rd0 [TM];
  logic signed [31:0] rd1 [TM];
  int model [2][PH][SLOTS][PAIRS][2][TM];

  output_tile_buf #(.TM_FIX(TMF), .TM_POT(TMP), .PH(PH), .NH(NH), .F_MAX(F), .ACC_W(32)) dut (
    .clk, .acc_en, .acc_lane_en, .acc_bank, .acc_first, .acc_slot, .acc_pair, .acc0, .acc1,
    .rd_en, .rd_bank, .rd_lane, .rd_slot, .rd_pair, .rd0, .rd1);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    acc_en = 0; rd_en = 0; rd_bank = 0; rd_lane = 0; rd_slot = 0; rd_pair = 0;
    // initialise every entry with a first write
    for (int b = 0; b < 2; b++) for (int s = 0; s < SLOTS; s++) for (int k = 0; k < PAIRS; k++) begin
      @(negedge clk);
      acc_en = 1; acc_bank = 1'(b); acc_first = 1; acc_slot = 1'(s); acc_pair = 2'(k);
      for (int p = 0; p < PH; p++) begin
        acc_lane_en[p] = 1;
        for (int m = 0; m < TM; m++) begin
          acc0[p][m] = $signed($urandom) >>> 8; acc1[p][m] = $signed($urandom) >>> 8;
          model[b][p][s][k][0][m] = acc0[p][m]; model[b][p][s][k][1][m] = acc1[p][m];
        end
      end
    end
    // random accumulates, including back-to-back hits of one entry
    for (int i = 0; i < 400; i++) begin
      int b, s, k;
      @(negedge clk);
      b = $urandom % 2; s = $urandom % SLOTS; k = (i % 3 == 0) ? 0 : $urandom % PAIRS;
      acc_en = 1; acc_bank = 1'(b); acc_first = ($urandom % 10 == 0); acc_slot = 1'(s); acc_pair = 2'(k);
      for (int p = 0; p < PH; p++) begin
        acc_lane_en[p] = 1'($urandom);
        for (int m = 0; m < TM; m++) begin
          acc0[p][m] = $signed($urandom) >>> 12; acc1[p][m] = $signed($urandom) >>> 12;
          if (acc_lane_en[p]) begin
            model[b][p][s][k][0][m] = (acc_first ? 0 : model[b][p][s][k][0][m]) + acc0[p][m];
            model[b][p][s][k][1][m] = (acc_first ? 0 : model[b][p][s][k][1][m]) + acc1[p][m];
          end
        end
      end
    end
    @(negedge clk);
    acc_en = 0;
    for (int b = 0; b < 2; b++) for (int p = 0; p < PH; p++) for (int s = 0; s < SLOTS; s++)
      for (int k = 0; k < PAIRS; k++) begin
        @(negedge clk);
        rd_en = 1; rd_bank = 1'(b); rd_lane = 1'(p); rd_slot = 1'(s); rd_pair = 2'(k);
        @(negedge clk);
        rd_en = 0;
        for (int m = 0; m < TM; m++) begin
          checks++;
          if (rd0[m] != model[b][p][s][k][0][m] || rd1[m] != model[b][p][s][k][1][m]) begin
            failures++;
            if (failures < 10) $display("FAIL b%0d p%0d s%0d k%0d m%0d got %0d exp %0d", b, p, s, k, m, rd0[m], model[b][p][s][k][0][m]);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
