// m2vit_pkg -- constants and types shared by the M2-ViT accelerator RTL.
//
// The array sizes (R, M, T, N, S, L) are the configuration evaluated for the
// accelerator: (R x M x T + N x S) x L = (3 x 3 x 16 + 9 x 8) x 16 multipliers
// and shifter units. Operand widths follow the two-level mixed quantisation:
// 8-bit unsigned activations, 4-bit weights for depthwise convolutions, 8-bit
// uniform or additive-power-of-two (APoT) weights for pointwise convolutions
// and matrix multiplications. Buffer depths, the address width, the APoT code
// layout and the instruction format are this design's own choices.
package m2vit_pkg;

  // Array configuration.
  localparam int R = 3;    // multipliers per PE block (rows of a 3x3 kernel)
  localparam int M = 3;    // PE blocks per MPMA tile (channels in single mode)
  localparam int T = 16;   // MPMA tiles
  localparam int N = 9;    // shifter units per SAT tile
  localparam int S = 8;    // SAT tiles
  localparam int L = 16;   // computing cores

  // Operand widths.
  localparam int AW    = 8;          // activation bits (unsigned)
  localparam int WDW   = 4;          // depthwise weight bits (signed)
  localparam int WUW   = 8;          // uniform PW / MatMul weight bits (signed)
  localparam int EW    = 3;          // APoT exponent magnitude bits, p in [-7,0]
  localparam int APW   = 1 + 2 * EW; // APoT code: {sign, |p1|, |p2|}
  localparam int KW    = R;          // kernel width handled by the MPMA (3x3)
  localparam int SLOTS = T + KW - 1; // input columns (or vectors) per input word

  // Buffer geometry.
  localparam int ADDR_W   = 8;
  localparam int DEPTH    = 1 << ADDR_W;
  localparam int COL_W    = M * R * AW;           // one input column / vector
  localparam int IN_WORD  = SLOTS * COL_W;        // input buffer word
  localparam int WU_WORD  = (T / 2) * M * R * WUW; // uniform weight word
  localparam int WA_WORD  = S * N * APW;          // APoT weight word
  localparam int AUX_WORD = T * M * AW;           // auxiliary buffer word

  localparam int SH_W = 5;  // requantisation shift field

  typedef enum logic [0:0] {
    MODE_SINGLE = 1'b0,  // 4-bit depthwise convolution, output-parallel
    MODE_MERGED = 1'b1   // 8-bit pointwise convolution / MatMul, filters-parallel
  } mpma_mode_e;

  typedef enum logic [0:0] {
    OP_DW = 1'b0,  // depthwise 3x3 convolution on the MPMA
    OP_PW = 1'b1   // pointwise convolution / MatMul on MPMA (uniform) and SAT (APoT)
  } op_e;

  // One instruction. Loop nest of OP_DW: for outer (channel groups of M),
  // for mid (input words of that channel group), for kx in 0..2.
  // Loop nest of OP_PW: for outer (filter groups of T/2 uniform plus S APoT
  // filters), for mid (pixels), for inner (9-channel input groups).
  typedef struct packed {
    op_e               op;
    logic [15:0]       n_outer;
    logic [15:0]       n_mid;
    logic [15:0]       n_inner;    // OP_PW only
    logic [ADDR_W-1:0] in_base;
    logic [ADDR_W-1:0] in_stride;  // OP_PW: input words per pixel
    logic [ADDR_W-1:0] wu_base;
    logic [ADDR_W-1:0] wa_base;
    logic [ADDR_W-1:0] out_base;
    logic [SH_W-1:0]   shift_u;    // requantisation shift of MPMA results
    logic [SH_W-1:0]   shift_a;    // requantisation shift of SAT results
  } instr_t;

  // Per-cycle control broadcast by the global controller to every core.
  // It is issued together with the buffer read addresses, one cycle ahead of
  // the buffer data.
  typedef struct packed {
    logic              valid;
    op_e               op;
    logic              first;   // first step of an accumulation
    logic              last;    // last step of an accumulation
    logic [1:0]        kx;      // kernel column (OP_DW)
    logic [4:0]        slot;    // vector within the input word (OP_PW)
    logic [ADDR_W-1:0] out_addr;
    logic [SH_W-1:0]   shift_u;
    logic [SH_W-1:0]   shift_a;
  } step_t;

  // Round-to-nearest right shift and clip to an unsigned 8-bit activation.
  function automatic logic [AW-1:0] requant(input logic signed [39:0] acc,
                                            input logic [SH_W-1:0] sh);
    logic signed [39:0] r;
    r = (sh == 0) ? acc : ((acc + (40'sd1 <<< (sh - 1))) >>> sh);
    if (r < 0) return '0;
    else if (r > 255) return 8'd255;
    else return r[AW-1:0];
  endfunction

endpackage
