// dcn_pkg: constants, types and arithmetic helpers shared by the deformable
// convolution layer (DCL) accelerator.
//
// Tile sizes follow the design point of the accelerator: T_N = 512 input
// channels, T_M = 64 output channels, T_H = 1 output row and T_W = 8 output
// pixels per tile, with a 3x3 kernel. The receptive field RF = K_C + 2*O_MAX
// (eq. 4 of the method) uses O_MAX = 2, the bound the offset regulariser
// leaves on the trained network (maximum offsets below 2.5, a 7x7 = 49 pixel
// window reaching full buffer efficiency). Input and output buffer depths are
// the method's formulas (6) and (7).
//
// Number format: this design's own choice. The original accelerator computes
// in single-precision floating point; here every datum is a signed DATA_W-bit
// fixed-point value with FRAC fraction bits, products and sums are kept in an
// ACC_W-bit accumulator, and a result is brought back to DATA_W bits by an
// arithmetic right shift by FRAC (rounding towards minus infinity) followed by
// saturation.
package dcn_pkg;

  // ---- tiling (method's design point) ----
  localparam int unsigned T_N    = 512;   // input channels per tile
  localparam int unsigned T_M    = 64;    // output channels per tile
  localparam int unsigned T_H    = 1;     // output rows per tile
  localparam int unsigned T_W    = 8;     // output pixels per tile row
  localparam int unsigned K_C    = 3;     // kernel size of the DCL
  localparam int unsigned K2     = K_C * K_C;
  localparam int unsigned O_MAX  = 2;     // ceil of the largest |offset|
  localparam int unsigned RF     = K_C + 2 * O_MAX;          // eq. (4)
  localparam int unsigned STRIDE = 1;
  localparam int unsigned W_WIN  = STRIDE * T_W + RF - STRIDE; // window width
  localparam int unsigned PAD    = (K_C - 1) / 2;

  // ---- computation engine ----
  localparam int unsigned ROWS   = T_M;   // PE rows: one per output channel
  localparam int unsigned COLS   = T_W;   // PE columns: one per output pixel

  // ---- buffers ----
  localparam int unsigned IN_BUF_WORDS  = RF * W_WIN * T_N;       // eq. (6)
  localparam int unsigned OUT_BUF_WORDS = T_W * T_N * 2 * K2;     // eq. (7)
  localparam int unsigned OFF_CH        = 2 * K2;                 // offset channels
  localparam int unsigned INTERP_WORDS  = T_W * K2 * T_N;
  // Region bases in the output buffer (logical word addresses)
  localparam int unsigned OB_INTERP_BASE = 0;
  localparam int unsigned OB_OFF_BASE    = INTERP_WORDS;
  localparam int unsigned OB_OUT_BASE    = INTERP_WORDS + OFF_CH * T_W;
  // Weight buffer: region 0 = offset-conv weights, region 1 = DCL weights
  localparam int unsigned W_REGION_WORDS = T_N * K2;
  localparam int unsigned W_BANK_WORDS   = 2 * W_REGION_WORDS;

  // ---- number format ----
  localparam int unsigned DATA_W = 16;
  localparam int unsigned FRAC   = 8;
  localparam int unsigned ACC_W  = 40;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Operation performed by the computation engine / controller phase
  typedef enum logic [2:0] {
    PH_IDLE    = 3'd0,
    PH_OFFCONV = 3'd1,   // input sampling stage: offset generation, eq. (1)
    PH_SAMPLE  = 3'd2,   // input sampling stage: bilinear interpolation
    PH_XFER    = 3'd3,   // interpolated inputs go out and back in
    PH_DCONV   = 3'd4,   // dynamic convolution stage, eq. (2)
    PH_DONE    = 3'd5
  } phase_e;

  // Tags that travel with the weight operand along a PE row
  typedef struct packed {
    logic valid;   // operand pair is meaningful
    logic first;   // first term of a sum: restart the accumulator
    logic last;    // last term: hand the sum to the output register next cycle
  } tag_t;

  // A result leaving the top of an engine column
  typedef struct packed {
    logic                    valid;
    logic [$clog2(ROWS)-1:0] row;
    acc_t                    sum;
  } result_t;

  // Requantise an accumulator to the data format: shift by FRAC, saturate.
  function automatic data_t requant(acc_t a);
    acc_t s;
    s = a >>> FRAC;
    if (s > acc_t'(2 ** (DATA_W - 1) - 1))        return data_t'(2 ** (DATA_W - 1) - 1);
    else if (s < -acc_t'(2 ** (DATA_W - 1)))      return data_t'(-(2 ** (DATA_W - 1)));
    else                                          return data_t'(s);
  endfunction

endpackage
