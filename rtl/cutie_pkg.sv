// cutie_pkg: constants and types shared by the TCN-CUTIE accelerator.
//
// Ternary values ("trits") travel as 2-bit codes {sign, nonzero}: 2'b00 is 0,
// 2'b01 is +1 and 2'b11 is -1; the unused code 2'b10 is read as 0. Feature
// vectors of N_CH trits are stored compressed, five trits to a byte, so 96
// channels take 20 bytes (160 bits) per pixel, the width printed on the
// compressed paths of the block diagram; uncompressed they take 192 bits.
// The layer descriptor type layer_cfg_t is this design's own register layout.
package cutie_pkg;

  // Sizes of the main configuration (96 channels, 64x64 feature maps,
  // 24-step TCN memory).
  localparam int unsigned N_CH       = 96;
  localparam int unsigned N_OCU      = 96;
  localparam int unsigned FM_MAX     = 64;
  localparam int unsigned TCN_STEPS  = 24;
  localparam int unsigned K          = 3;    // kernel side
  localparam int unsigned SUM_W      = 14;   // pre-activation width
  localparam int unsigned W_DEPTH    = 64;   // weight memory words per OCU
  localparam int unsigned MAX_LAYERS = 16;

  // Compressed bytes needed for n trits (five trits per byte).
  function automatic int unsigned cbytes(input int unsigned n);
    return (n + 4) / 5;
  endfunction

  // Ternary codes.
  typedef logic [1:0] trit_t;
  localparam trit_t T_ZERO = 2'b00;
  localparam trit_t T_POS  = 2'b01;
  localparam trit_t T_NEG  = 2'b11;

  // Ternary code <-> base-3 digit used inside a compressed byte.
  function automatic logic [1:0] trit2digit(input trit_t t);
    if (!t[0])     return 2'd0;
    else if (!t[1]) return 2'd1;
    else            return 2'd2;
  endfunction

  function automatic trit_t digit2trit(input logic [1:0] d);
    case (d)
      2'd1:    return T_POS;
      2'd2:    return T_NEG;
      default: return T_ZERO;
    endcase
  endfunction

  // Signed value of a trit.
  function automatic logic signed [1:0] trit_val(input trit_t t);
    if (!t[0]) return 2'sd0;
    else if (!t[1]) return 2'sd1;
    else return -2'sd1;
  endfunction

  typedef enum logic [1:0] {
    POOL_NONE = 2'd0,
    POOL_MAX  = 2'd1,
    POOL_SUM  = 2'd2   // 2x2 average pooling; the factor 4 is folded into the thresholds
  } pool_e;

  // Layer descriptor, written through the control port (two 32-bit words).
  typedef struct packed {
    // word 1
    logic [4:0] seq_len;   // number of valid time steps in the TCN memory (1..24)
    logic [4:0] dilation;  // TCN dilation D = width of the wrapped 2D map (1..24)
    logic [5:0] wbase;     // first weight-memory word of this layer
    logic [6:0] n_oc;      // active output channels (1..96)
    // word 0
    logic       dst_tcn;   // 1: push outputs into the TCN memory, 0: write activation memory
    logic       src_tcn;   // 1: read inputs through the TCN memory, 0: activation memory
    logic       out_buf;   // activation buffer half written
    logic       in_buf;    // activation buffer half read
    pool_e      pool;
    logic [6:0] in_h;      // input feature-map height (1..64), ignored for TCN input
    logic [6:0] in_w;      // input feature-map width  (1..64), ignored for TCN input
  } layer_cfg_t;

endpackage
