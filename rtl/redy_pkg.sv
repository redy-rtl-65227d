// redy_pkg: constants and types shared by the ReDy accelerator.
//
// The ReDy unit builds an 8-bin histogram of the exponents of a group of FP32
// activations, measures how far it is from a uniform distribution (DU) and
// maps DU to a precision between 3 and 8 bits. The bin count (8), the exponent
// width (8), the bin-counter width (10) and the DU width (11) follow the
// published unit; the crossbar geometry (128x128 cells of 2 bits, 8-bit
// weights, 16 ADCs of 5 bits per crossbar) follows the published evaluation
// setup. The configuration struct layout is this design's own choice.
package redy_pkg;

  localparam int N_BINS    = 8;              // histogram bins (b)
  localparam int SEL_W     = $clog2(N_BINS); // bin-select counter width
  localparam int EXP_W     = 8;              // FP32 exponent width
  localparam int CNT_W     = 10;             // bin counter / mux output width
  localparam int DU_W      = 11;             // DU width, unsigned Q1.10
  localparam int DU_FRAC   = 10;             // fraction bits of DU
  localparam int N_COEF    = 5;              // thresholds p1..p5
  localparam int PREC_W    = 4;              // precision code (3..8)
  localparam int MAX_PREC  = 8;
  localparam int MIN_PREC  = 3;
  localparam int DEPTH_W   = 12;             // group size (input channels)

  typedef logic [PREC_W-1:0] prec_t;

  // Per-layer configuration of the ReDy units, loaded before a layer runs.
  typedef struct packed {
    logic [N_BINS-2:0][EXP_W-1:0] bound;       // r_0..r_(N-2), ascending exponents
    logic [N_BINS-1:0][CNT_W-1:0] ed;          // expected count per bin
    logic [N_COEF-1:0][DU_W-1:0]  p;           // [0]=p1 ... [4]=p5, Q1.10, descending
    logic [DEPTH_W-1:0]           depth;       // group size (input channels)
    logic [3:0]                   n_log2;      // log2 of the number of binned samples
    logic [7:0]                   sample_stride; // bin one activation in every k (0 acts as 1)
  } redy_cfg_t;

  // Per-layer configuration of the quantizer (Q = INT(r*s) - z).
  typedef struct packed {
    logic [15:0]       scale_m;  // s = scale_m * 2^scale_e
    logic signed [7:0] scale_e;
    logic [7:0]        zero;     // z
  } quant_cfg_t;

  // Per-layer configuration of the post-processing.
  typedef struct packed {
    logic signed [31:0] offset;  // subtracted from the accumulated sum
    logic [5:0]         frac;    // result is scaled by 2^-frac
    logic [3:0]         pool_n;  // max-pool window in output pixels (0 acts as 1)
  } post_cfg_t;

endpackage
