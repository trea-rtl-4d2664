// trea_pkg: types and constants shared by the accelerator.
//
// Holds the layer descriptor written by the host (one per time-multiplexed
// layer), the precision and activation-select encodings, and the array and
// memory sizes. The 100-unit array and the 5x5 largest kernel follow the
// published architecture; memory depths, field widths and encodings are this
// design's own choices.
package trea_pkg;

  // Array and kernel geometry
  localparam int unsigned N_UNITS = 100;                 // DQ-MAC units in the 1D array
  localparam int unsigned KMAX    = 5;                   // largest kernel side (5x5)
  localparam int unsigned ROW_W   = N_UNITS + KMAX - 1;  // pixels per L1 row / line-buffer row
  localparam int unsigned LANES   = 4;                   // SIMD lanes per DQ-MAC
  localparam int unsigned NL      = 8;                   // layer descriptors held on chip

  // Memory sizes
  localparam int unsigned L1_DEPTH = 1024;  // L1 rows of ROW_W bytes
  localparam int unsigned WB_DEPTH = 4096;  // weight words
  localparam int unsigned BB_DEPTH = 256;   // bias words
  localparam int unsigned OB_DEPTH = 8192;  // output-buffer bytes

  // Weight word: 4 weight nibbles (or one byte in [7:0]) + 4 kernel indices
  localparam int unsigned IDX_W = 6;                       // {ky[2:0], kx[2:0]}
  localparam int unsigned WW_W  = 16 + LANES * IDX_W;      // 40 bits

  // Precision mode of the DQ-MAC (Pmode)
  typedef enum logic {
    PREC8 = 1'b0,   // one FxP8 product per cycle
    PREC4 = 1'b1    // four FxP4 products per cycle
  } prec_t;

  // Activation select of the RQ-NAF core (2-bit control)
  typedef enum logic [1:0] {
    AF_RELU    = 2'b00,
    AF_SIGMOID = 2'b01,
    AF_TANH    = 2'b10,
    AF_NONE    = 2'b11
  } af_t;

  // One layer as the control engine sees it
  typedef struct packed {
    logic [6:0]  in_w;       // input width  (<= ROW_W)
    logic [7:0]  in_h;       // input height
    logic [7:0]  in_ch;      // input channels
    logic [7:0]  out_ch;     // output channels
    logic [2:0]  k;          // kernel side: 1, 3 or 5
    prec_t       prec;       // FxP4 or FxP8
    logic        sharp;      // SHARP-pruned weights (4:9 / 12:25)
    af_t         af;         // activation
    logic [11:0] in_base;    // first L1 row of the input
    logic [11:0] out_base;   // first L1 row of the output
    logic [11:0] w_base;     // first weight word
    logic [7:0]  b_base;     // first bias word
    logic [4:0]  out_shift;  // bit-trunc window
    logic [2:0]  trunc;      // pre-accumulation truncation
  } layer_desc_t;

  // Tag carried with each result through PISO, RQ-NAF and FIFO
  typedef struct packed {
    logic [11:0] l1_row;   // destination L1 row
    logic [11:0] ob_row;   // output row index within the layer (channel*OH + y)
    logic [6:0]  col;      // column
  } res_tag_t;             // 31 bits

  // Retained weights per kernel under SHARP: R = 4 * floor(K*K/8)
  function automatic int unsigned sharp_keep(input int unsigned k);
    return 4 * ((k * k) / 8);
  endfunction

  // Weight words (issue steps) per input channel
  function automatic logic [4:0] steps_for(input logic [2:0] k, input prec_t prec, input logic sharp);
    int unsigned kk, lanes, r;
    kk    = int'(k) * int'(k);
    lanes = (prec == PREC4) ? LANES : 1;
    r     = 4 * (kk / 8);
    if (sharp && r != 0) return 5'(r / lanes);
    return 5'((kk + lanes - 1) / lanes);
  endfunction

endpackage
