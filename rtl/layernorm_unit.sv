// layernorm_unit: LayerNorm of one token at a time with 16-bit data, and
// quantisation of the result to the b-bit input of the next FC layer.
//
// Data format: inputs x, gamma and beta are 16-bit Q8.8. For a token of N
// channels (N = n_ch, a multiple of D_FIX, at most N_MAX):
//   mean = sum(x)/N,  var = sum(x^2)/N - mean^2 + 2^-16,
//   y    = (x - mean) / sqrt(var) * gamma + beta     (Q8.8),
//   q    = sat_b( round(y / 2^q_shift) )            (b-bit activation).
// Sequence per token: LOAD accepts N/8 input words (8 channels each) and
// keeps them in a token buffer while summing x and x^2; the mean, E[x^2],
// the square root (bit-serial, 16 cycles) and 1/std (2^24 / std) follow on
// one shared 48-cycle divider; OUT then normalises 8 channels per cycle
// and packs D_FIX results into each output word. Input and output are
// valid/ready streams; gamma/beta are written beforehand through the
// par_* port (one word of 8 values each per write). All formats and the
// divider/square-root method are this design's choices; the paper states
// only that LN stays unquantised at 16 bits and that LN input and
// quantised LN output use separate transfer ports.
module layernorm_unit #(
  parameter int unsigned N_MAX = 768,
  parameter int unsigned B_FIX = vit_pkg::B_FIX,
  parameter int unsigned AXI_W = vit_pkg::AXI_W,
  localparam int unsigned LN_W = vit_pkg::LN_W,
  localparam int unsigned L    = AXI_W / LN_W,      // channels per input word
  localparam int unsigned D    = AXI_W / B_FIX,     // activations per output word
  localparam int unsigned NWD  = N_MAX / L,
  localparam int unsigned AW   = $clog2(NWD)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [15:0]      n_ch,
  input  logic [4:0]       q_shift,
  input  logic             par_we,
  input  logic [AW-1:0]    par_addr,
  input  logic [AXI_W-1:0] par_gamma,
  input  logic [AXI_W-1:0] par_beta,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [AXI_W-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [AXI_W-1:0] out_data,
  output logic             busy
);
  typedef enum logic [2:0] {S_LOAD, S_MEAN, S_EX2, S_SQRT, S_INV, S_OUT, S_SEND} state_e;
  state_e state;

  logic [AXI_W-1:0] xbuf [NWD];
  logic [AXI_W-1:0] gbuf [NWD];
  logic [AXI_W-1:0] bbuf [NWD];

  logic [AW-1:0]        widx;
  logic                 tok_end;    // last output word of the token assembled
  logic signed [31:0]   sum;
  logic [47:0]          sq;
  logic signed [16:0]   mean;       // Q8.8
  logic [31:0]          var_q;      // Q16.16
  logic [15:0]          sd;         // Q8.8
  logic [4:0]           sbit;
  logic [23:0]          inv;        // 2^24 / sd
  logic [$clog2(D/L+1)-1:0] pk;
  logic                 div_start, div_done;
  logic [47:0]          div_num, div_quot;
  logic [23:0]          div_den;

  seq_divu #(.NUM_W(48), .DEN_W(24)) u_div (
    .clk, .rst_n, .start(div_start), .num(div_num), .den(div_den),
    .done(div_done), .quot(div_quot));

  assign in_ready = (state == S_LOAD);
  assign busy     = (state != S_LOAD) || (widx != 0);

  // sums of the incoming word
  logic signed [31:0] wsum;
  logic [47:0]        wsq;
  logic signed [31:0] tot;        // sum of the token including this word
  logic [31:0]        tot_abs;
  always_comb begin
    wsum = '0; wsq = '0;
    for (int i = 0; i < L; i++) begin
      logic signed [15:0] x;
      x = in_data[i*LN_W +: LN_W];
      wsum = wsum + 32'(x);
      wsq  = wsq + 48'(32'(x) * 32'(x));
    end
    tot     = sum + wsum;
    tot_abs = (tot < 0) ? 32'(-tot) : 32'(tot);
  end

  // normalisation of one word of 8 channels
  localparam logic signed [47:0] QMAX = 48'((1 << (B_FIX-1)) - 1);
  logic [L*B_FIX-1:0] qword;
  always_comb begin
    for (int i = 0; i < L; i++) begin
      logic signed [16:0] xv, g, b;
      logic signed [47:0] dx, xn, y, r;
      xv = 17'(signed'(xbuf[widx][i*LN_W +: LN_W]));
      g  = 17'(signed'(gbuf[widx][i*LN_W +: LN_W]));
      b  = 17'(signed'(bbuf[widx][i*LN_W +: LN_W]));
      dx = 48'(xv - mean);
      xn = (dx * 48'(signed'({1'b0, inv}))) >>> 16;        // Q8.8
      y  = ((xn * 48'(g)) >>> 8) + 48'(b);                  // Q8.8
      r  = (q_shift == 0) ? y : ((y + (48'sd1 <<< (q_shift - 1'b1))) >>> q_shift);
      if (r > QMAX)       r = QMAX;
      else if (r < -QMAX) r = -QMAX;
      qword[i*B_FIX +: B_FIX] = r[B_FIX-1:0];
    end
  end

  always_ff @(posedge clk) begin
    if (par_we) begin
      gbuf[par_addr] <= par_gamma;
      bbuf[par_addr] <= par_beta;
    end
    if (state == S_LOAD && in_valid) xbuf[widx] <= in_data;
  end

  // variance = E[x^2] - mean^2 + 1 LSB, clamped to 32 bits
  logic signed [47:0] var_d;
  logic [31:0]        var_n;
  always_comb begin
    var_d = 48'(div_quot) - 48'(32'(mean) * 32'(mean)) + 48'sd1;
    if (var_d < 48'sd1)                var_n = 32'd1;
    else if (var_d > 48'sh0_FFFF_FFFF) var_n = 32'hFFFF_FFFF;
    else                               var_n = 32'(var_d);
  end

  logic [31:0] sqt;
  assign sqt = 32'({sd | (16'd1 << sbit)}) * 32'({sd | (16'd1 << sbit)});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD; widx <= '0; tok_end <= 1'b0; sum <= '0; sq <= '0; mean <= '0; var_q <= '0;
      sd <= '0; sbit <= '0; inv <= '0; pk <= '0; div_start <= 1'b0; div_num <= '0;
      div_den <= '0; out_valid <= 1'b0; out_data <= '0;
    end else begin
      div_start <= 1'b0;
      case (state)
        S_LOAD: if (in_valid) begin
          sum <= sum + wsum;
          sq  <= sq + wsq;
          if (32'(widx) + 1 == 32'(n_ch) / L) begin
            widx <= '0;
            state <= S_MEAN;
            div_num <= 48'(tot_abs);
            div_den <= 24'(n_ch);
            div_start <= 1'b1;
          end else widx <= widx + 1'b1;
        end
        S_MEAN: if (div_done) begin
          mean <= (sum < 0) ? -17'(div_quot) : 17'(div_quot);
          div_num <= sq; div_den <= 24'(n_ch); div_start <= 1'b1;
          state <= S_EX2;
        end
        S_EX2: if (div_done) begin
          var_q <= var_n;
          sd <= '0; sbit <= 5'd15;
          state <= S_SQRT;
        end
        S_SQRT: begin
          if (sqt <= var_q) sd <= sd | (16'd1 << sbit);
          if (sbit == 0) begin
            state <= S_INV;
            div_num <= 48'd1 << 24;
            div_den <= {8'd0, (sqt <= var_q) ? (sd | 16'd1) : ((sd == 0) ? 16'd1 : sd)};
            div_start <= 1'b1;
          end else sbit <= sbit - 1'b1;
        end
        S_INV: if (div_done) begin
          inv <= (div_quot > 48'hFF_FFFF) ? 24'hFF_FFFF : 24'(div_quot);
          pk <= '0;
          state <= S_OUT;
        end
        S_OUT: begin
          out_data[32'(pk)*L*B_FIX +: L*B_FIX] <= qword;
          if (32'(widx) + 1 == 32'(n_ch) / L) begin widx <= '0; tok_end <= 1'b1; end
          else widx <= widx + 1'b1;
          if (32'(pk) + 1 == D / L) begin pk <= '0; out_valid <= 1'b1; state <= S_SEND; end
          else pk <= pk + 1'b1;
        end
        S_SEND: if (out_ready) begin
          out_valid <= 1'b0;
          if (tok_end) begin
            tok_end <= 1'b0; sum <= '0; sq <= '0; state <= S_LOAD;
          end else state <= S_OUT;
        end
        default: state <= S_LOAD;
      endcase
    end
  end
endmodule
