// dsp_pack_mul: one DSP48E2-style multiplier P = (A + D) * B (A, D 27-bit,
// B 18-bit, P 45-bit) shared by several low-bit multiplications, plus the
// fabric logic that splits P back into signed products.
//
// B <= 4 (the paper's W4A4 packing, four products per DSP):
//   A = w0, D = w1 << 22, B = a0 + (a1 << 11)
//   P = w0*a0 + w0*a1<<11 + w1*a0<<22 + w1*a1<<33
//   Each field is read as a signed 11-bit number and corrected by the sign
//   (borrow) of the field below it.
// 5 <= B <= 8 (two products per DSP): the 18-bit B port cannot hold two 8-bit
//   activations with separable 16-bit products, so the weight w0 goes to B
//   and the activations to A = a0, D = a1 << 18; P = w0*a0 + w0*a1<<18.
//   w1 is ignored and p[2], p[3] are zero. This port assignment departs
//   from the paper's wording (weight in A, activations in B).
// Outputs: p[0]=w0*a0, p[1]=w0*a1, p[2]=w1*a0, p[3]=w1*a1. Combinational;
// a real DSP would register P.
// Lint notes P bits [9:8] as unused: with 4-bit packing they lie between the
// 8-bit field of w0*a0 and the next field, and only carry its sign extension.
module dsp_pack_mul #(
  parameter int unsigned B = vit_pkg::B_FIX
) (
  input  logic signed [B-1:0]   w0,
  input  logic signed [B-1:0]   w1,
  input  logic signed [B-1:0]   a0,
  input  logic signed [B-1:0]   a1,
  output logic signed [2*B-1:0] p [4]
);
  logic signed [26:0] port_a, port_d;
  logic signed [17:0] port_b;
  logic signed [27:0] pre_add;
  logic signed [44:0] port_p;

  initial assert (B >= 2 && B <= 8) else $error("dsp_pack_mul supports 2..8 bits, got %0d", B);

  generate
    if (B <= 4) begin : g_quad
      localparam int unsigned SA = 11;   // activation spacing in B
      localparam int unsigned SW = 22;   // weight spacing in D
      logic signed [10:0] f1, f2;
      logic signed [11:0] f3;
      always_comb begin
        port_a  = 27'(w0);
        port_d  = 27'(w1) <<< SW;
        port_b  = 18'(a0) + (18'(a1) <<< SA);
        pre_add = 28'(port_a) + 28'(port_d);
        port_p  = 45'(pre_add * 46'(port_b));
        f1 = port_p[21:11];
        f2 = port_p[32:22];
        f3 = port_p[44:33];
        p[0] = port_p[2*B-1:0];
        p[1] = (2*B)'(f1 + 11'(port_p[10]));
        p[2] = (2*B)'(f2 + 11'(port_p[21]));
        p[3] = (2*B)'(f3 + 12'(port_p[32]));
      end
    end else begin : g_pair
      localparam int unsigned SA = 18;
      logic signed [26:0] f1;
      always_comb begin
        port_a  = 27'(a0);
        port_d  = 27'(a1) <<< SA;
        port_b  = 18'(w0);
        pre_add = 28'(port_a) + 28'(port_d);
        port_p  = 45'(pre_add * 46'(port_b));
        f1 = port_p[44:18];
        p[0] = port_p[2*B-1:0];
        p[1] = (2*B)'(f1 + 27'(port_p[17]));
        p[2] = '0;
        p[3] = '0;
      end
    end
  endgenerate
endmodule
