// cnna_pkg: constants, types and helpers shared by the CNN accelerator (CNNA).
//
// The accelerator is a single computation engine that runs one CNN layer
// (convolution, pooling or fully connected) at a time. Its size is set by five
// template numbers; the defaults here are the 16-bit configuration the design
// is built around: 16-bit Q2.14 data, a 128-bit internal bandwidth (8 data
// elements per word), 8 processing elements (PEs), an output bandwidth
// multiplier of 3 after the circular line buffer (three window rows side by
// side) and a weight buffer sized for 32 kernels of 3x3x512.
//
// The per-layer configuration arrives over the CTRL stream as CTRL_WORDS
// 32-bit words. The field layout of those words is this design's own choice:
//   word 0: [1:0] op, [2] activation, [5:4] pooling type,
//           [15:8] window size, [23:16] stride, [31:24] zero padding
//   word 1: [15:0] row size (input image is square), [31:16] depth (elements)
//   word 2: [15:0] replay count, [31:16] number of kernels in this pass
//   word 3: [15:0] output row size, [31:16] stitch prefix depth (elements)
//   word 4: scale factor (signed, Q2.14 for 16-bit data, low DATA_W bits used)
//   word 5: fully connected input length in X beats
// The five template numbers follow the original design; the struct, the CTRL
// word packing, the field widths and the Q2.14 format are this design's own
// choices.
// Lint: when this package is compiled with a module that uses only some of it,
// the linter lists the unused template defaults (UNUSEDPARAM) and the reserved
// CTRL bits that unpack_cfg skips (UNUSEDSIGNAL). Both are expected.
package cnna_pkg;

  // Template defaults (configuration CNNA16: beta = [16,128,8,3,32]).
  parameter int DATA_W     = 16;   // word length of the fixed-point data (I+F)
  parameter int FRAC_W     = 14;   // fractional bits, Q2.14
  parameter int PE_BW      = 128;  // internal bandwidth in bits
  parameter int PE_N       = 8;    // number of processing elements
  parameter int DB_OUT_BW  = 3;    // output bandwidth multiplier after the CLB
  parameter int KERNELS_N  = 32;   // kernels of 3x3x512 the weight buffer holds
  parameter int MAX_DEPTH  = 512;  // deepest input (VGG16)
  parameter int MAX_WIN    = 3;    // largest window; = DB_OUT_BW rows
  parameter int LINE_WORDS = 2048; // words of PE_BW bits per line buffer
  parameter int ACC_W      = 48;   // accumulator width
  parameter int CTRL_W     = 32;   // CTRL stream word width
  parameter int CTRL_WORDS = 6;    // words per layer configuration

  typedef enum logic [1:0] {
    OP_CONV = 2'd0,
    OP_POOL = 2'd1,
    OP_FC   = 2'd2
  } op_e;

  typedef enum logic [1:0] {
    POOL_MAX = 2'd0,
    POOL_MIN = 2'd1,
    POOL_AVG = 2'd2
  } pool_e;

  typedef enum logic {
    ACT_LINEAR = 1'b0,
    ACT_RELU   = 1'b1
  } act_e;

  // Layer configuration, as decoded from the CTRL stream.
  typedef struct packed {
    op_e         op;
    act_e        act;
    pool_e       pool;
    logic [7:0]  win;        // window size K (K x K x depth)
    logic [7:0]  stride;
    logic [7:0]  pad;        // zero padding around the image
    logic [15:0] row_size;   // input rows = columns
    logic [15:0] depth;      // input channels, a multiple of PE_BW/DATA_W
    logic [15:0] replay;     // times each window is resent (kernels / PE_N)
    logic [15:0] n_kernels;  // kernels loaded in this pass
    logic [15:0] out_size;   // output rows = columns
    logic [15:0] pre_depth;  // stitched prefix taken from XBUF per pixel
    logic [31:0] scale;      // scale factor, signed fixed point
    logic [31:0] fc_beats;   // X beats of a fully connected input vector
  } layer_cfg_t;

  function automatic layer_cfg_t unpack_cfg(input logic [CTRL_WORDS*CTRL_W-1:0] w);
    layer_cfg_t c;
    c.op        = op_e'(w[1:0]);
    c.act       = act_e'(w[2]);
    c.pool      = pool_e'(w[5:4]);
    c.win       = w[15:8];
    c.stride    = w[23:16];
    c.pad       = w[31:24];
    c.row_size  = w[32+:16];
    c.depth     = w[48+:16];
    c.replay    = w[64+:16];
    c.n_kernels = w[80+:16];
    c.out_size  = w[96+:16];
    c.pre_depth = w[112+:16];
    c.scale     = w[128+:32];
    c.fc_beats  = w[160+:32];
    return c;
  endfunction

  // Inverse of unpack_cfg, used by software models and testbenches.
  function automatic logic [CTRL_WORDS*CTRL_W-1:0] pack_cfg(input layer_cfg_t c);
    logic [CTRL_WORDS*CTRL_W-1:0] w;
    w = '0;
    w[1:0]     = c.op;
    w[2]       = c.act;
    w[5:4]     = c.pool;
    w[15:8]    = c.win;
    w[23:16]   = c.stride;
    w[31:24]   = c.pad;
    w[32+:16]  = c.row_size;
    w[48+:16]  = c.depth;
    w[64+:16]  = c.replay;
    w[80+:16]  = c.n_kernels;
    w[96+:16]  = c.out_size;
    w[112+:16] = c.pre_depth;
    w[128+:32] = c.scale;
    w[160+:32] = c.fc_beats;
    return w;
  endfunction

endpackage
