// cnn_pkg -- types and constants shared by the streaming CNN accelerator.
//
// The datapath is 16-bit fixed point (paper: "16-bit fixed point"). The
// on-chip SRAM word is 16 bytes, i.e. eight 16-bit pixels, one pixel from each
// of eight consecutive image rows at the same column ("lanes"). Sixteen 3x3
// convolution units (CUs) work on the eight lanes for two output features.
// Everything else here (Q7.8 format, field widths, the command encoding) is
// this design's own choice, the paper does not give it.
package cnn_pkg;

  localparam int DATA_W  = 16;              // pixel / weight width
  localparam int LANES   = 8;               // pixels per SRAM word
  localparam int WORD_W  = DATA_W * LANES;  // 128-bit SRAM word
  localparam int NUM_CU  = 16;              // convolution units
  localparam int NFEAT   = NUM_CU / LANES;  // output features per pass (2)
  localparam int FRAC_W  = 8;               // Q7.8 fixed point
  localparam int HALF_AW = 12;              // word address inside one 64 KB half
  localparam int COL_W   = 8;               // column index (up to 256 columns)
  localparam int BAND_W  = 9;               // band index (8 rows per band)
  localparam int DIM_W   = 12;              // width/height/channel fields

  typedef logic signed [DATA_W-1:0] pix_t;
  typedef pix_t [LANES-1:0]         word_t;     // lane g = row 8*band+g
  typedef pix_t [2:0]               group_t;    // 3 rows for one CU, [0] oldest

  localparam pix_t PIX_MIN = {1'b1, {(DATA_W-1){1'b0}}};
  localparam pix_t PIX_MAX = {1'b0, {(DATA_W-1){1'b1}}};

  // Position of one streamed SRAM word; travels alongside the data so every
  // pipeline stage knows where it is in the layer.
  typedef struct packed {
    logic              valid;
    logic              upd;       // first word of a channel: swap in new weights
    logic              first_ch;  // channel 0: add bias, overwrite partial sums
    logic [BAND_W-1:0] band;
    logic [COL_W-1:0]  col;
  } tag_t;

  // Layer configuration written by the command decoder.
  typedef struct packed {
    logic [HALF_AW-1:0] in_base;   // first word of the input tile (input half)
    logic [HALF_AW-1:0] out_base;  // first word of the result (output half)
    logic [DIM_W-1:0]   width;     // input columns
    logic [DIM_W-1:0]   height;    // input rows
    logic [DIM_W-1:0]   channels;  // input channels
    logic [2:0]         stride;    // convolution stride 1..4
    logic               pool_en;   // run max pooling after accumulation
    logic               pool3;     // pool window 3x3 (else 2x2)
    logic               in_sel;    // which buffer-bank half is Layer_input
    logic               mode1x1;   // 1x1 convolution instead of 3x3
  } layer_cfg_t;

  // 16-bit command word: [15:12] opcode, [11:0] immediate.
  typedef enum logic [3:0] {
    OP_NOP      = 4'h0,
    OP_IN_BASE  = 4'h1,
    OP_OUT_BASE = 4'h2,
    OP_WIDTH    = 4'h3,
    OP_HEIGHT   = 4'h4,
    OP_CHANNELS = 4'h5,
    OP_MODE     = 4'h6,   // imm[2:0] stride, [3] pool_en, [4] pool3, [5] in_sel, [6] mode1x1
    OP_END      = 4'hE,   // last word of the command list in DRAM
    OP_RUN      = 4'hF
  } opcode_t;

  // Saturate a wide signed value to 16 bits.
  function automatic pix_t sat16(input logic signed [39:0] v);
    if (v > 40'sd32767)       return PIX_MAX;
    else if (v < -40'sd32768) return PIX_MIN;
    else                      return pix_t'(v);
  endfunction

  function automatic pix_t max2(input pix_t a, input pix_t b);
    return (a > b) ? a : b;
  endfunction

endpackage
