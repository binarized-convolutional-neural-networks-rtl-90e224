// bcnn_sf_accel: convolution accelerator for a binarized CNN whose 3x3
// filters are binary and of rank one ("separable filters").
//
// It runs the six convolutional layers of the CIFAR-10 network (Conv-1 on the
// image, Conv-2..Conv-6 on binary feature maps, 2x2 max pooling after Conv-2,
// Conv-4 and Conv-6) for one image at a time, one layer call after another,
// under the control of a host. The dense layers stay on the host.
//
// Blocks:
//   accel_ctrl      call sequencer, stream loader/drainer, address generation
//   window_ram x3   image RAM and two ping-pong feature buffers; each returns
//                   a full 3x3 window per cycle
//   sdp_ram  x2     weight RAM (5-bit filter codes) and batch-norm RAM
//   sep_conv_fix    first-layer separable convolution on fixed-point pixels
//   sep_conv_bin    binary separable convolution, LANES channels per cycle,
//                   accumulating over channel groups
//   max_pool        2x2 max of the convolution sums
//   batch_norm      k*x + h and sign -> one output activation bit
//
// Host interface: cfg + start / busy / done (see accel_ctrl for the five
// call types and the stream formats), a valid/ready input stream for image,
// weights and batch-norm parameters, and a valid/ready output stream that
// returns a feature map. Intermediate feature maps never leave the chip.
//
// Throughput: one 3x3 window of LANES input channels per cycle against one
// output channel, i.e. out_pixels * 4 (pooled) * oc_count * groups cycles per
// run call. Buffer sizes (defaults): feature banks hold a 32x32 map of 128
// channels (9 x 256 words of 64 bits); the weight RAM holds 1024 words of 64
// codes, so Conv-5 and Conv-6 need 2 and 4 calls.
//
// Origin: the split into a first-layer unit, a configurable binary-layer unit,
// pooling, batch normalisation and on-chip feature and weight RAMs, the 5-bit
// filter codes with their decoder and the multi-call handling of large layers
// follow the published accelerator. Its parallelism, clock, memory
// organisation and host interface are not published; the 64-lane datapath,
// the banked window RAMs and the streams are this design's own, so the cycle
// count (about 1.18 M cycles per image) says nothing about the original's
// speed.
//
// Lint notes: rst_n is reported as used both synchronously and asynchronously
// because the controller's handshake assertions sample it ("disable iff");
// all resets in the design are asynchronous. Only the first and src_buf
// fields of the registered call description are used here; the rest serve the
// controller.
module bcnn_sf_accel
  import bcnn_pkg::*;
#(
  parameter int unsigned LANES_P    = LANES,
  parameter int unsigned FM_DEPTH   = 256,
  parameter int unsigned IMG_DEPTH  = 128,
  parameter int unsigned WT_DEPTH   = 1024,
  parameter int unsigned BN_DEPTH   = MAX_CH,
  localparam int unsigned WT_W      = LANES_P * CODE_W,
  localparam int unsigned IMG_W     = IMG_CH * PIX_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  layer_cfg_t            cfg,
  output logic                  busy,
  output logic                  done,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [STREAM_W-1:0]   in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [LANES_P-1:0]    out_data
);
  localparam int unsigned WT_AW = $clog2(WT_DEPTH);
  localparam int unsigned BN_AW = $clog2(BN_DEPTH);

  layer_cfg_t cfg_q;

  logic                 img_wr_en, fm_wr_en;
  logic [DIM_W-1:0]     wr_y, wr_x, wr_wq;
  logic [GRP_W-1:0]     wr_g, wr_gn;
  logic [IMG_W-1:0]     img_wr_data;
  logic [LANES_P-1:0]   fm_wr_data;
  logic                 rd_en;
  logic [DIM_W-1:0]     rd_y, rd_x, rd_wq;
  logic [GRP_W-1:0]     rd_g, rd_gn;
  logic                 wt_we, wt_re, bn_we, bn_re;
  logic [WT_AW-1:0]     wt_waddr, wt_raddr;
  logic [WT_W-1:0]      wt_wdata, wt_rdata;
  logic [BN_AW-1:0]     bn_waddr, bn_raddr;
  logic [2*BN_W-1:0]    bn_wdata, bn_rdata;
  logic                 conv_valid, conv_first, conv_last;
  logic [2:0]           row_ok, col_ok;
  logic                 pool_first, pool_last;
  logic signed [BN_W-1:0] bn_k, bn_h;
  logic                 bit_valid, bit_val;

  logic [IMG_W-1:0]     img_win [9];
  logic [LANES_P-1:0]   fm0_win [9], fm1_win [9], src_win [9];

  accel_ctrl #(
    .LANES_P (LANES_P),
    .IN_CH_P (IMG_CH),
    .PIX_W_P (PIX_W),
    .STREAM_W_P(STREAM_W),
    .WT_DEPTH(WT_DEPTH),
    .BN_DEPTH(BN_DEPTH)
  ) u_ctrl (
    .clk, .rst_n, .start, .cfg, .cfg_q, .busy, .done,
    .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data,
    .img_wr_en, .fm_wr_en, .wr_y, .wr_x, .wr_g, .wr_wq, .wr_gn,
    .img_wr_data, .fm_wr_data,
    .rd_en, .rd_y, .rd_x, .rd_g, .rd_wq, .rd_gn, .rd_center(src_win[4]),
    .wt_we, .wt_waddr, .wt_wdata, .wt_re, .wt_raddr,
    .bn_we, .bn_waddr, .bn_wdata, .bn_re, .bn_raddr, .bn_rdata,
    .conv_valid, .conv_first, .conv_last, .row_ok, .col_ok,
    .pool_first, .pool_last, .bn_k, .bn_h, .bit_valid, .bit_val
  );

  // ------------------------------------------------------------ memories
  window_ram #(.WORD_W(IMG_W), .DEPTH(IMG_DEPTH)) u_img_ram (
    .clk,
    .wr_en(img_wr_en), .wr_y, .wr_x, .wr_g, .wr_wq, .wr_gn, .wr_data(img_wr_data),
    .rd_en, .rd_y, .rd_x, .rd_g, .rd_wq, .rd_gn, .rd_win(img_win)
  );

  window_ram #(.WORD_W(LANES_P), .DEPTH(FM_DEPTH)) u_fm0 (
    .clk,
    .wr_en(fm_wr_en && cfg_q.src_buf), .wr_y, .wr_x, .wr_g, .wr_wq, .wr_gn,
    .wr_data(fm_wr_data),
    .rd_en, .rd_y, .rd_x, .rd_g, .rd_wq, .rd_gn, .rd_win(fm0_win)
  );

  window_ram #(.WORD_W(LANES_P), .DEPTH(FM_DEPTH)) u_fm1 (
    .clk,
    .wr_en(fm_wr_en && !cfg_q.src_buf), .wr_y, .wr_x, .wr_g, .wr_wq, .wr_gn,
    .wr_data(fm_wr_data),
    .rd_en, .rd_y, .rd_x, .rd_g, .rd_wq, .rd_gn, .rd_win(fm1_win)
  );

  always_comb begin
    for (int t = 0; t < 9; t++) src_win[t] = cfg_q.src_buf ? fm1_win[t] : fm0_win[t];
  end

  sdp_ram #(.WIDTH(WT_W), .DEPTH(WT_DEPTH)) u_wt_ram (
    .clk, .we(wt_we), .waddr(wt_waddr), .wdata(wt_wdata),
    .re(wt_re), .raddr(wt_raddr), .rdata(wt_rdata)
  );

  sdp_ram #(.WIDTH(2*BN_W), .DEPTH(BN_DEPTH)) u_bn_ram (
    .clk, .we(bn_we), .waddr(bn_waddr), .wdata(bn_wdata),
    .re(bn_re), .raddr(bn_raddr), .rdata(bn_rdata)
  );

  // ------------------------------------------------------------ compute
  sf_code_t codes [LANES_P];
  always_comb begin
    for (int c = 0; c < LANES_P; c++) codes[c] = wt_rdata[c*CODE_W +: CODE_W];
  end

  logic                    fix_valid, bin_valid;
  logic signed [ACC_W-1:0] fix_sum, bin_sum;

  sep_conv_fix #(.IN_CH_P(IMG_CH), .PIX_W_P(PIX_W), .SUM_W_P(ACC_W)) u_conv1 (
    .clk, .rst_n,
    .in_valid (conv_valid && cfg_q.first),
    .win      (img_win),
    .codes    (codes[0:IMG_CH-1]),
    .row_ok, .col_ok,
    .out_valid(fix_valid),
    .out_sum  (fix_sum)
  );

  sep_conv_bin #(.LANES_P(LANES_P), .ACC_W_P(ACC_W)) u_conv2_5 (
    .clk, .rst_n,
    .in_valid (conv_valid && !cfg_q.first),
    .in_first (conv_first),
    .in_last  (conv_last),
    .win      (src_win),
    .codes    (codes),
    .row_ok, .col_ok,
    .out_valid(bin_valid),
    .out_sum  (bin_sum)
  );

  logic                    pool_valid;
  logic signed [ACC_W-1:0] pool_val;

  max_pool #(.W(ACC_W)) u_pool (
    .clk, .rst_n,
    .in_valid (cfg_q.first ? fix_valid : bin_valid),
    .in_first (pool_first),
    .in_last  (pool_last),
    .in_val   (cfg_q.first ? fix_sum : bin_sum),
    .out_valid(pool_valid),
    .out_val  (pool_val)
  );

  batch_norm #(.X_W(ACC_W), .K_W(BN_W)) u_bn (
    .clk, .rst_n,
    .in_valid (pool_valid),
    .x        (pool_val),
    .k        (bn_k),
    .h        (bn_h),
    .out_valid(bit_valid),
    .out_bit  (bit_val)
  );
endmodule
