// bcnn_pkg: types, constants and helper functions shared by the BCNN with
// separable filters (BCNNw/SF) convolution accelerator.
//
// Binary values are held as bits: 1 stands for +1, 0 for -1. A 3x3 binary
// filter of rank one is the outer product F[i][j] = u[i] * v[j] of a column
// vector u (rows i = 0..2, top to bottom) and a row vector v (columns j = 0..2,
// left to right). Since (u, v) and (-u, -v) give the same filter there are
// 2^(2*3-1) = 32 distinct filters, each stored as a 5-bit code.
//
// Code order (a choice of this design): for code c, let s = c[4] and
// l = s ? ~c[3:0] : c[3:0]. The filter is F = (s ? +1 : -1) * a * b^T with
// a = (+1, l[1] ? -1 : +1, l[0] ? -1 : +1) and b = (+1, l[3] ? -1 : +1,
// l[2] ? -1 : +1). Code 0 is the all -1 filter, code 31 the all +1 filter, and
// code 31-k is the negation of code k. This order reproduces the order in which
// the published filter-frequency chart lays out the 32 filters.
//
// Feature maps are stored channel-packed: one word holds LANES channels of one
// pixel, so a layer with C channels uses C/LANES "groups" per pixel.
package bcnn_pkg;

  // Paper numbers: 3x3 filters, 5-bit codes, CIFAR-10 sizes (Table 1).
  localparam int unsigned FILT_D     = 3;
  localparam int unsigned CODE_W     = 5;
  localparam int unsigned IMG_CH     = 3;    // input image channels
  localparam int unsigned IMG_DIM    = 32;   // input image height and width
  localparam int unsigned MAX_CH     = 512;  // widest layer (Conv-5, Conv-6)
  // Choices of this design.
  localparam int unsigned LANES      = 64;   // channels per feature word
  localparam int unsigned PIX_W      = 8;    // signed first-layer pixel width
  localparam int unsigned ACC_W      = 16;   // convolution sum width
  localparam int unsigned BN_W       = 16;   // batch-norm k and h width
  localparam int unsigned STREAM_W   = 64;   // input stream beat width
  localparam int unsigned DIM_W      = 6;    // height / width field
  localparam int unsigned GRP_W      = 4;    // channel-group count field
  localparam int unsigned OC_W       = 10;   // output-channel field

  typedef logic [CODE_W-1:0] sf_code_t;

  // One separable filter: u indexed by row, v by column.
  typedef struct packed {
    logic [FILT_D-1:0] u;
    logic [FILT_D-1:0] v;
  } sf_vec_t;

  typedef enum logic [2:0] {
    OP_LOAD_IMG = 3'd0,  // stream H*W image pixels into the image RAM
    OP_LOAD_WT  = 3'd1,  // stream the filter codes of this call
    OP_LOAD_BN  = 3'd2,  // stream the batch-norm (k, h) pairs of this call
    OP_RUN      = 3'd3,  // compute the call's output channels
    OP_DRAIN    = 3'd4   // stream a feature map out
  } op_e;

  // One accelerator call.
  typedef struct packed {
    op_e              op;
    logic             first;     // layer is Conv-1 (image input)
    logic             pool;      // apply 2x2 max pooling
    logic             src_buf;   // feature buffer read; the other is written
    logic [DIM_W-1:0] h;         // input height (= conv output height)
    logic [DIM_W-1:0] w;         // input width
    logic [GRP_W-1:0] in_groups; // input channels / LANES (1 for Conv-1)
    logic [GRP_W-1:0] out_groups;// output channels of the layer / LANES
    logic [OC_W-1:0]  oc_base;   // first output channel of the call
    logic [OC_W-1:0]  oc_count;  // output channels of the call
  } layer_cfg_t;

  // Number of 3-pixel blocks covering n pixels.
  function automatic logic [DIM_W-1:0] div3_ceil(logic [DIM_W-1:0] n);
    return DIM_W'((32'(n) + 2) / 3);
  endfunction

endpackage
