// seq_divu: unsigned restoring divider, one quotient bit per cycle.
// start loads the operands; done pulses NUM_W cycles later with
// quot = num / den (den = 0 gives all ones). Used by the LayerNorm unit.
module seq_divu #(
  parameter int unsigned NUM_W = 48,
  parameter int unsigned DEN_W = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [NUM_W-1:0] num,
  input  logic [DEN_W-1:0] den,
  output logic             done,
  output logic [NUM_W-1:0] quot
);
  logic [DEN_W:0]   rem;
  logic [DEN_W-1:0] d;
  logic [NUM_W-1:0] q;
  logic [$clog2(NUM_W+1)-1:0] cnt;
  logic             run;
  logic [DEN_W+1:0] trial;

  assign trial = {rem, q[NUM_W-1]} - {2'b00, d};
  assign quot  = q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem <= '0; d <= '0; q <= '0; cnt <= '0; run <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        rem <= '0; d <= den; q <= num; cnt <= '0; run <= 1'b1;
      end else if (run) begin
        if (!trial[DEN_W+1]) begin
          rem <= trial[DEN_W:0];
          q   <= {q[NUM_W-2:0], 1'b1};
        end else begin
          rem <= {rem[DEN_W-1:0], q[NUM_W-1]};
          q   <= {q[NUM_W-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
        if (32'(cnt) == NUM_W - 1) begin run <= 1'b0; done <= 1'b1; end
      end
    end
  end
endmodule
