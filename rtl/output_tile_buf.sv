// output_tile_buf: double-buffered output accumulators.
//
// Organised as P_h lane memories; an entry holds the T_m accumulators of a
// token pair. A lane memory has SLOTS = N_h / P_h head slots per bank: in
// MSA mode head h = slot*P_h + lane keeps its own T_m x F result (N_h
// slices in all, the N_h factor of the paper's output-buffer size); in FC
// mode only lane 0, slot 0 is used.
// Accumulate port: on acc_en every lane with acc_lane_en set does
//   entry <= (acc_first ? 0 : entry) + acc_val
// in one cycle (asynchronous read, write at the clock edge), so back-to-back
// updates of the same entry are safe.
// Store read port: rd_en loads rd0/rd1 (tokens 2k and 2k+1) from the given
// bank, lane, slot and pair on the next clock edge; they hold otherwise.
module output_tile_buf #(
  parameter int unsigned TM_FIX = vit_pkg::TM_FIX,
  parameter int unsigned TM_POT = vit_pkg::TM_POT,
  parameter int unsigned PH     = vit_pkg::PH,
  parameter int unsigned NH     = vit_pkg::NH,
  parameter int unsigned F_MAX  = vit_pkg::F_MAX,
  parameter int unsigned ACC_W  = vit_pkg::ACC_W,
  localparam int unsigned TM    = TM_FIX + TM_POT,
  localparam int unsigned SLOTS = NH / PH,
  localparam int unsigned PAIRS = (F_MAX + 1) / 2,
  localparam int unsigned SW    = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned KW    = (PAIRS > 1) ? $clog2(PAIRS) : 1,
  localparam int unsigned HW    = (PH > 1) ? $clog2(PH) : 1
) (
  input  logic                    clk,
  // accumulate
  input  logic                    acc_en,
  input  logic                    acc_lane_en [PH],
  input  logic                    acc_bank,
  input  logic                    acc_first,
  input  logic [SW-1:0]           acc_slot,
  input  logic [KW-1:0]           acc_pair,
  input  logic signed [ACC_W-1:0] acc0 [PH][TM],
  input  logic signed [ACC_W-1:0] acc1 [PH][TM],
  // store read
  input  logic                    rd_en,
  input  logic                    rd_bank,
  input  logic [HW-1:0]           rd_lane,
  input  logic [SW-1:0]           rd_slot,
  input  logic [KW-1:0]           rd_pair,
  output logic signed [ACC_W-1:0] rd0 [TM],
  output logic signed [ACC_W-1:0] rd1 [TM]
);
  typedef logic signed [ACC_W-1:0] row_t [TM];
  row_t q0 [PH];
  row_t q1 [PH];

  initial assert (NH % PH == 0) else $error("P_h must divide N_h");

  for (genvar p = 0; p < PH; p++) begin : g_lane
    logic signed [ACC_W-1:0] mem0 [2][SLOTS][PAIRS][TM];
    logic signed [ACC_W-1:0] mem1 [2][SLOTS][PAIRS][TM];
    always_ff @(posedge clk) begin
      if (acc_en && acc_lane_en[p]) begin
        for (int m = 0; m < TM; m++) begin
          mem0[acc_bank][acc_slot][acc_pair][m] <=
            (acc_first ? '0 : mem0[acc_bank][acc_slot][acc_pair][m]) + acc0[p][m];
          mem1[acc_bank][acc_slot][acc_pair][m] <=
            (acc_first ? '0 : mem1[acc_bank][acc_slot][acc_pair][m]) + acc1[p][m];
        end
      end
      if (rd_en) begin
        q0[p] <= mem0[rd_bank][rd_slot][rd_pair];
        q1[p] <= mem1[rd_bank][rd_slot][rd_pair];
      end
    end
  end

  // lane select after the registered read; rd_lane must stay stable
  logic [HW-1:0] lane_q;
  always_ff @(posedge clk) if (rd_en) lane_q <= rd_lane;
  always_comb begin
    rd0 = q0[lane_q];
    rd1 = q1[lane_q];
  end
endmodule
