// vit_pkg: shared constants and types of the mixed-scheme ViT accelerator.
//
// The defaults describe the main configuration: DeiT-base with Fixed W4A4
// rows and PoT W3A4 rows (k_PoT = 40 %), 12 heads of which 4 are processed
// in parallel. Bit-widths, head counts and the packing rule D = 128 / b come
// from the paper's text; the tile sizes T_m^Fix = 24 and T_m^PoT = 16, the
// 128-bit data ports, the port counts and the accumulator width are this
// design's own choices (see the README).
// Some constants (D', A_out, the 16-bit values per word) only document the
// configuration and are not read by every module, so lint notes them as
// unused parameters; they are kept on purpose.
package vit_pkg;

  localparam int unsigned AXI_W   = 128;            // width of one memory word
  localparam int unsigned B_FIX   = 4;              // b : Fixed weight and activation bits
  localparam int unsigned B_POT   = 3;              // b': PoT weight bits, floor(log2 b)+1
  localparam int unsigned D_FIX   = AXI_W / B_FIX;  // D : values per word (activations, Fixed weights)
  localparam int unsigned D_POT   = AXI_W / B_POT;  // D': PoT weights per word
  localparam int unsigned TN      = D_FIX;          // T_n = D
  localparam int unsigned TM_FIX  = 24;             // T_m^Fix
  localparam int unsigned TM_POT  = 16;             // T_m^PoT
  localparam int unsigned TM      = TM_FIX + TM_POT;
  localparam int unsigned NH      = 12;             // N_h
  localparam int unsigned PH      = 4;              // P_h
  localparam int unsigned F_MAX   = 197;            // tokens per image (196 patches + class token)
  localparam int unsigned ACC_W   = 32;             // output accumulator width
  localparam int unsigned A_IN    = 8;              // input-tile ports
  localparam int unsigned A_WGT   = 4;              // weight-tile ports
  localparam int unsigned A_OUT   = 2;              // output ports
  localparam int unsigned LN_W    = 16;             // LayerNorm / skip data width (Q8.8)
  localparam int unsigned LN_PER_WORD = AXI_W / LN_W;

  // Kind of layer the engine runs.
  typedef enum logic {
    MODE_FC  = 1'b0,   // results of all heads are summed (fully connected layer)
    MODE_MSA = 1'b1    // each head keeps its own result (multi-head attention matmul)
  } layer_mode_e;

  // Per-layer configuration written by the host before start.
  typedef struct packed {
    logic [15:0] m;          // output channels M (rows of W)
    logic [15:0] n;          // input channels N, a multiple of NH*TN
    logic [8:0]  f;          // tokens F, 1..F_MAX
    layer_mode_e mode;       // FC or MSA
    logic [4:0]  rq_shift;   // right shift that requantises an accumulator to b bits
    logic        res_en;     // FC mode only: emit 16-bit results plus the skip input
    logic [4:0]  res_shift;  // right shift that brings an accumulator to Q8.8
  } layer_cfg_t;

endpackage
