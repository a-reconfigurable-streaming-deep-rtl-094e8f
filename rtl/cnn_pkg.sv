// cnn_pkg: types and constants shared by the streaming CNN accelerator.
//
// Data are 16-bit two's-complement fixed point (the accelerator's only
// arithmetic format). The position of the binary point is not fixed by the
// architecture; this design uses 8 fraction bits (Q8.8) for products, which
// are rounded back to 16 bits with saturation.
//
// Geometry that follows the architecture: 16 convolution units (CUs) of 3x3
// processing engines, split into an even-channel set and an odd-channel set
// of 8 CUs; the buffer bank streams 8 rows of 16 bits per set per cycle
// (256 bits per cycle in all); a 96 KB buffer bank of four single-port banks;
// a 16 KB scratchpad organised as two ping-pong sub-buffers; a 128-deep
// command FIFO. Command encodings, bank layout, weight-packet layout and
// all address widths are this design's own choices.
package cnn_pkg;

  localparam int unsigned DATA_W   = 16;  // word width
  localparam int unsigned FRAC_W   = 8;   // fraction bits of the Q8.8 format
  localparam int unsigned LANES    = 8;   // rows per set (CUs per set)
  localparam int unsigned NSETS    = 2;   // even-channel set (0) and odd-channel set (1)
  localparam int unsigned BANK_DEPTH = 1536;  // 96 KB / 4 banks / 16 B per address
  localparam int unsigned BANK_AW  = 11;
  localparam int unsigned SP_DEPTH = 256;     // words per scratchpad lane memory
  localparam int unsigned SP_MEMS  = 16;      // lane memories per sub-buffer
  localparam int unsigned SP_LAW   = 9;       // logical scratchpad address: 8 lanes x 512
  localparam int unsigned DIM_W    = 12;      // image sizes, channel and feature counts
  localparam int unsigned CRD_W    = 14;      // signed image coordinates
  localparam int unsigned MAX_SHIFTS = 64;    // 23x23 kernel -> 24x24 -> 8x8 sub-filters
  localparam int unsigned WPKT_WORDS = 20;    // 16-bit words in one weight packet
  localparam int unsigned WPKT_BEATS = 5;     // 64-bit DMA beats per packet
  localparam int unsigned CMD_DEPTH  = 128;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [CRD_W-1:0]  crd_t;
  typedef logic [DIM_W-1:0]         dim_t;

  // Weights of one CU set: w[row][col], row 0 multiplies the top input row.
  typedef data_t wset_t [3][3];

  // Command word: [15:12] opcode, [11:0] payload.
  typedef enum logic [3:0] {
    OP_NOP      = 4'h0,
    OP_IN_H     = 4'h1,   // input channel height
    OP_IN_W     = 4'h2,   // input channel width
    OP_OUT_H    = 4'h3,   // convolution output height
    OP_OUT_W    = 4'h4,   // convolution output width
    OP_NCH      = 4'h5,   // number of input channels
    OP_NFEAT    = 4'h6,   // number of output features
    OP_MODE     = 4'h7,   // layer mode bits, see mode_t
    OP_CLR_SHIFT= 4'h8,   // empty the shift-address list
    OP_SHIFT    = 4'h9,   // append a sub-filter shift address: [4:0] row, [9:5] column
    OP_RUN      = 4'hA,   // execute the configured layer
    OP_END      = 4'hF    // end of program
  } opcode_e;

  // Payload of OP_MODE.
  typedef struct packed {
    logic [4:0] pad;      // [11:7] zero padding on the top/left edge
    logic       in_set;   // [6]    buffer-bank set holding the layer input
    logic       pool3;    // [5]    max pool window 3 (else 2)
    logic       pool_en;  // [4]    max pooling after the convolution
    logic       relu;     // [3]    ReLU on readout
    logic [1:0] stride;   // [2:1]  log2 of the stride: 0,1,2 -> 1,2,4
    logic       k1x1;     // [0]    1x1 (interleaved, two features) mode
  } mode_t;

  // Everything a single pass (one channel pair, one sub-filter) needs.
  typedef struct packed {
    logic        k1x1;
    logic [1:0]  stride;   // log2
    dim_t        in_h, in_w;
    dim_t        out_h, out_w;
    dim_t        nch;
    dim_t        cpair;    // channel pair index: channels 2*cpair (even) and 2*cpair+1 (odd)
    logic        in_set;
    crd_t        sr, sc;   // output = decomposed output shifted by (sr, sc) = pad - shift
    logic        first;    // first pass of a feature: bias + partial sum, no read
  } pass_cfg_t;

  // Tag that travels with a column through the CU pipeline.
  typedef struct packed {
    logic  valid;
    crd_t  g;     // row group
    crd_t  q;     // decomposed output column
  } tag_t;

  function automatic data_t sat16(input logic signed [39:0] v);
    if (v > 40'sd32767)       return 16'sh7fff;
    else if (v < -40'sd32768) return 16'sh8000;
    else                      return v[15:0];
  endfunction

  // Round-to-nearest rescale of a Q16.16 product sum to Q8.8, saturated.
  function automatic data_t rescale(input logic signed [39:0] v);
    logic signed [39:0] r;
    r = (v + 40'sd128) >>> FRAC_W;
    return sat16(r);
  endfunction

  function automatic data_t max2(input data_t a, input data_t b);
    return (a > b) ? a : b;
  endfunction

endpackage
