// Shared types and constants of the MRAM-based CNN accelerator.
//
// The engine works on tiles of P x P pixels (P = 14). One MAC array of
// 42 x 42 multipliers (= 14 x 14 pixels x 9 taps of a 3x3 filter) evaluates
// a whole tile in one cycle. Activations are 9 bits and filter coefficients
// 15 bits wide, the widths the design's number formats use; their internal
// floating-point layout is not specified, so both are treated here as
// two's-complement integers. Accumulator width and the address widths are
// this design's own choices.
package mram_cnn_pkg;

  localparam int unsigned P        = 14;       // tile edge, pixels
  localparam int unsigned K        = 3;        // filter edge
  localparam int unsigned TAPS     = K * K;    // taps per filter
  localparam int unsigned MAC_ROWS = P * K;    // 42 rows of the MAC array
  localparam int unsigned MAC_COLS = P * K;    // 42 MACs per row
  localparam int unsigned ACT_W    = 9;        // activation width
  localparam int unsigned COEF_W   = 15;       // coefficient width
  localparam int unsigned PROD_W   = ACT_W + COEF_W;
  localparam int unsigned ACC_W    = 32;       // per-pixel accumulator
  localparam int unsigned MRAM_AW  = 22;       // coefficient MRAM word address
  localparam int unsigned SRAM_AW  = 18;       // activation SRAM row address
  localparam int unsigned CH_W     = 10;       // channel count field (1..1023)
  localparam int unsigned SHIFT_W  = 5;
  localparam int unsigned MODEL_W  = 3;        // up to 8 resident models

  typedef logic signed [ACT_W-1:0]  act_t;
  typedef logic signed [COEF_W-1:0] coef_t;
  typedef logic signed [PROD_W-1:0] prod_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  typedef act_t  act_row_t  [P];        // one SRAM word: a row of a tile
  typedef act_t  act_tile_t [P][P];     // [row][column]
  typedef acc_t  acc_tile_t [P][P];
  typedef coef_t filt_t     [K][K];     // [ky][kx]

  localparam int unsigned ROW_BITS  = P * ACT_W;      // 126
  localparam int unsigned WORD_BITS = TAPS * COEF_W;  // 135

  typedef logic [ROW_BITS-1:0]  row_bits_t;
  typedef logic [WORD_BITS-1:0] coef_word_t;

  // Descriptor of one 3x3 convolution layer on one tile.
  typedef struct packed {
    logic [MODEL_W-1:0] model;     // selects the model base address
    logic [MRAM_AW-1:0] coef_off;  // layer start, relative to the model base
    logic [SRAM_AW-1:0] in_base;   // SRAM row of input channel 0, row 0
    logic [SRAM_AW-1:0] out_base;  // SRAM row of output channel 0, row 0
    logic [CH_W-1:0]    cin;       // input channels (>= 1)
    logic [CH_W-1:0]    cout;      // output channels (>= 1)
    logic [SHIFT_W-1:0] shift;     // right shift applied after the bias
    logic               relu_en;
    logic               pool_en;
    logic [1:0]         quad;      // {y,x} quadrant of a pooled result
  } layer_desc_t;

  // Packing helpers: lane i of a row occupies bits [i*ACT_W +: ACT_W];
  // tap (ky,kx) of a coefficient word occupies bits [(ky*K+kx)*COEF_W +: COEF_W].
  function automatic act_row_t unpack_row(row_bits_t b);
    act_row_t r;
    for (int i = 0; i < P; i++) r[i] = act_t'(b[i*ACT_W +: ACT_W]);
    return r;
  endfunction

  function automatic row_bits_t pack_row(act_row_t r);
    row_bits_t b;
    for (int i = 0; i < P; i++) b[i*ACT_W +: ACT_W] = r[i];
    return b;
  endfunction

  function automatic filt_t unpack_filt(coef_word_t w);
    filt_t f;
    for (int ky = 0; ky < K; ky++)
      for (int kx = 0; kx < K; kx++)
        f[ky][kx] = coef_t'(w[(ky*K+kx)*COEF_W +: COEF_W]);
    return f;
  endfunction

endpackage
