// accel_ctrl: controller of the convolution accelerator.
//
// The accelerator works one call at a time. The host sets cfg and pulses
// start; busy stays high until done pulses. A call is one of:
//   OP_LOAD_IMG  H*W beats, one image pixel each (IMG_CH signed PIX_W-bit
//                channels in the low bits), row-major, into the image RAM.
//   OP_LOAD_WT   the filter codes of the call: one weight word per output
//                channel and input group (Conv-1: per output channel), in the
//                order oc, then group. A word holds LANES 5-bit codes, code c
//                for input channel group*LANES + c at bits [5c +: 5], and is
//                sent as WT_BEATS stream beats, least significant beat first.
//   OP_LOAD_BN   oc_count beats, {k, h} in bits [2*BN_W-1:0], k high.
//   OP_RUN       computes output channels oc_base .. oc_base+oc_count-1 of a
//                layer from the feature buffer src_buf (or the image for
//                Conv-1) into the other feature buffer.
//   OP_DRAIN     streams feature buffer src_buf out, one word per pixel and
//                group, row-major, groups innermost.
// Layers larger than the weight RAM are split by the host into several
// OP_LOAD_WT / OP_LOAD_BN / OP_RUN calls on consecutive output-channel ranges.
//
// OP_RUN loop nest, outermost first: output pixel row py, column px, output
// channel oc, pooling sub-pixel (4 when pooling, else 1), input group g.
// One window and one weight word are read every cycle (stage 0). The
// pipeline behind it, with the stage at which each unit sees its data:
//   stage 1  RAM data; convolution unit input (conv_* outputs)
//   stage 2  convolution sum; max_pool input (pool_* outputs)
//   stage 3  pooled sum; batch_norm input (bn_k / bn_h outputs)
//   stage 4  output bit; collected into a LANES-bit word, written to the
//            destination buffer when the word is full.
// So a run call takes out_pixels * subs * oc_count * groups cycles plus a
// fixed 6 (call set-up and pipeline drain), counted from the clock edge that
// samples start to the one that raises done.
// oc_base and oc_count must be multiples of LANES.
//
// Origin: the published design says only that the host loads an image, then
// for each layer loads its weights and computes, with large layers split into
// several calls because weight storage is limited, and that intermediate maps
// stay on chip. The call types, stream formats, loop order and pipeline depth
// here are this design's own.
//
// Load data reaches the RAMs without a register: img_wr_data, bn_wdata and
// the last 64 bits of wt_wdata are wired straight from in_data, and the RAM
// is written in the cycle the beat is accepted.
//
// rst_n is an asynchronous reset; the assertions below also
// sample it in "disable iff", which lint reports as a mixed reset use.
module accel_ctrl
  import bcnn_pkg::*;
#(
  parameter int unsigned LANES_P    = LANES,
  parameter int unsigned IN_CH_P    = IMG_CH,
  parameter int unsigned PIX_W_P    = PIX_W,
  parameter int unsigned STREAM_W_P = STREAM_W,
  parameter int unsigned WT_DEPTH   = 1024,
  parameter int unsigned BN_DEPTH   = MAX_CH,
  localparam int unsigned WT_W      = LANES_P * CODE_W,
  localparam int unsigned WT_BEATS  = (WT_W + STREAM_W_P - 1) / STREAM_W_P,
  localparam int unsigned WT_AW     = $clog2(WT_DEPTH),
  localparam int unsigned BN_AW     = $clog2(BN_DEPTH),
  localparam int unsigned LANE_W    = $clog2(LANES_P)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // call interface
  input  logic                     start,
  input  layer_cfg_t               cfg,
  output layer_cfg_t               cfg_q,
  output logic                     busy,
  output logic                     done,
  // input stream
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [STREAM_W_P-1:0]    in_data,
  // output stream
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [LANES_P-1:0]       out_data,
  // buffer write port (image RAM or destination feature buffer)
  output logic                     img_wr_en,
  output logic                     fm_wr_en,
  output logic [DIM_W-1:0]         wr_y,
  output logic [DIM_W-1:0]         wr_x,
  output logic [GRP_W-1:0]         wr_g,
  output logic [DIM_W-1:0]         wr_wq,
  output logic [GRP_W-1:0]         wr_gn,
  output logic [IN_CH_P*PIX_W_P-1:0] img_wr_data,
  output logic [LANES_P-1:0]       fm_wr_data,
  // window read port (image RAM or source feature buffer)
  output logic                     rd_en,
  output logic [DIM_W-1:0]         rd_y,
  output logic [DIM_W-1:0]         rd_x,
  output logic [GRP_W-1:0]         rd_g,
  output logic [DIM_W-1:0]         rd_wq,
  output logic [GRP_W-1:0]         rd_gn,
  input  logic [LANES_P-1:0]       rd_center,
  // weight RAM
  output logic                     wt_we,
  output logic [WT_AW-1:0]         wt_waddr,
  output logic [WT_W-1:0]          wt_wdata,
  output logic                     wt_re,
  output logic [WT_AW-1:0]         wt_raddr,
  // batch-norm parameter RAM
  output logic                     bn_we,
  output logic [BN_AW-1:0]         bn_waddr,
  output logic [2*BN_W-1:0]        bn_wdata,
  output logic                     bn_re,
  output logic [BN_AW-1:0]         bn_raddr,
  input  logic [2*BN_W-1:0]        bn_rdata,
  // datapath control
  output logic                     conv_valid,   // stage 1
  output logic                     conv_first,
  output logic                     conv_last,
  output logic [2:0]               row_ok,
  output logic [2:0]               col_ok,
  output logic                     pool_first,   // stage 2
  output logic                     pool_last,
  output logic signed [BN_W-1:0]   bn_k,         // stage 3
  output logic signed [BN_W-1:0]   bn_h,
  input  logic                     bit_valid,    // stage 4
  input  logic                     bit_val
);
  typedef enum logic [2:0] {
    S_IDLE, S_LOAD_IMG, S_LOAD_WT, S_LOAD_BN, S_RUN, S_FLUSH, S_DRAIN
  } state_e;

  typedef struct packed {
    logic             valid;
    logic             first_g;
    logic             last_g;
    logic             first_sub;
    logic             last_sub;
    logic [2:0]       row_ok;
    logic [2:0]       col_ok;
    logic [OC_W-1:0]  oc;
    logic [DIM_W-1:0] oy;
    logic [DIM_W-1:0] ox;
  } tag_t;

  state_e state;
  tag_t   tag [1:4];

  // Loop counters (shared by loads, run and drain).
  logic [DIM_W-1:0] cy, cx;      // pixel (load, drain) or output pixel (run)
  logic [GRP_W-1:0] cg;          // group
  logic [1:0]       csub;        // pooling sub-pixel
  logic [OC_W-1:0]  coc;         // output channel within the call
  logic [WT_AW:0]   cword;       // weight word / bn entry counter
  logic [$clog2(WT_BEATS+1)-1:0] cbeat;
  logic [WT_BEATS*STREAM_W_P-1:0] wt_buf;
  logic             drain_pend;
  logic [LANES_P-1:0] out_word;

  // Derived sizes of the current call.
  logic [DIM_W-1:0] oh, ow, wq_in, wq_out;
  logic [GRP_W-1:0] gn_in;
  logic [1:0]       nsub_m1;
  logic [WT_AW:0]   nwords;
  always_comb begin
    oh      = cfg_q.pool ? cfg_q.h >> 1 : cfg_q.h;
    ow      = cfg_q.pool ? cfg_q.w >> 1 : cfg_q.w;
    wq_in   = div3_ceil(cfg_q.w);
    wq_out  = div3_ceil(ow);
    gn_in   = cfg_q.first ? GRP_W'(1) : cfg_q.in_groups;
    nsub_m1 = cfg_q.pool ? 2'd3 : 2'd0;
    nwords  = cfg_q.first ? (WT_AW+1)'(cfg_q.oc_count)
                          : (WT_AW+1)'(32'(cfg_q.oc_count) * 32'(cfg_q.in_groups));
  end

  logic beat;
  assign in_ready = (state == S_LOAD_IMG) || (state == S_LOAD_WT) || (state == S_LOAD_BN);
  assign beat     = in_valid && in_ready;
  assign busy     = (state != S_IDLE);

  // ---------------------------------------------------------------- issue
  logic             issue;
  logic             last_g, last_sub, last_oc, last_px, last_py;
  logic [DIM_W-1:0] iy, ix;
  always_comb begin
    issue    = (state == S_RUN);
    last_g   = (cg == gn_in - 1'b1);
    last_sub = (csub == nsub_m1);
    last_oc  = (coc == cfg_q.oc_count - 1'b1);
    last_px  = (cx == ow - 1'b1);
    last_py  = (cy == oh - 1'b1);
    iy = cfg_q.pool ? {cy[DIM_W-2:0], csub[1]} : cy;
    ix = cfg_q.pool ? {cx[DIM_W-2:0], csub[0]} : cx;
  end

  tag_t itag;
  always_comb begin
    itag           = '0;
    itag.valid     = issue;
    itag.first_g   = (cg == '0);
    itag.last_g    = last_g;
    itag.first_sub = (csub == '0);
    itag.last_sub  = last_sub;
    itag.row_ok    = {(32'(iy) + 1 < 32'(cfg_q.h)), 1'b1, (iy != '0)};
    itag.col_ok    = {(32'(ix) + 1 < 32'(cfg_q.w)), 1'b1, (ix != '0)};
    itag.oc        = coc;
    itag.oy        = cy;
    itag.ox        = cx;
  end

  // Read ports.
  always_comb begin
    rd_en    = issue || (state == S_DRAIN && !drain_pend && !out_valid);
    rd_y     = issue ? iy : cy;
    rd_x     = issue ? ix : cx;
    rd_g     = cg;
    rd_wq    = wq_in;
    rd_gn    = gn_in;
    wt_re    = issue;
    wt_raddr = cfg_q.first ? WT_AW'(coc) : WT_AW'(32'(coc) * 32'(gn_in) + 32'(cg));
    bn_re    = issue;
    bn_raddr = BN_AW'(coc);
  end

  // Datapath control outputs.
  logic [2*BN_W-1:0] bn_d2, bn_d3;
  always_comb begin
    conv_valid = tag[1].valid;
    conv_first = tag[1].first_g;
    conv_last  = tag[1].last_g;
    row_ok     = tag[1].row_ok;
    col_ok     = tag[1].col_ok;
    pool_first = tag[2].first_sub;
    pool_last  = tag[2].last_sub;
    bn_k       = bn_d3[2*BN_W-1:BN_W];
    bn_h       = bn_d3[BN_W-1:0];
  end

  // ---------------------------------------------------------------- stage 4
  logic [LANE_W-1:0] lane;
  logic [OC_W-1:0]   oc_abs;
  logic              word_full;
  always_comb begin
    lane      = tag[4].oc[LANE_W-1:0];
    oc_abs    = cfg_q.oc_base + tag[4].oc;
    word_full = bit_valid && (lane == LANE_W'(LANES_P - 1));
    fm_wr_data = out_word;
    fm_wr_data[lane] = bit_val;
  end

  // Buffer write port.
  always_comb begin
    img_wr_en   = (state == S_LOAD_IMG) && beat;
    fm_wr_en    = word_full;
    img_wr_data = in_data[IN_CH_P*PIX_W_P-1:0];
    if (state == S_LOAD_IMG) begin
      wr_y  = cy;
      wr_x  = cx;
      wr_g  = '0;
      wr_wq = wq_in;
      wr_gn = GRP_W'(1);
    end else begin
      wr_y  = tag[4].oy;
      wr_x  = tag[4].ox;
      wr_g  = GRP_W'(oc_abs / OC_W'(LANES_P));
      wr_wq = wq_out;
      wr_gn = cfg_q.out_groups;
    end
  end

  // Weight and batch-norm writes.
  always_comb begin
    wt_we    = (state == S_LOAD_WT) && beat && (32'(cbeat) == WT_BEATS - 1);
    wt_waddr = WT_AW'(cword);
    wt_wdata = wt_buf[WT_W-1:0];
    wt_wdata[WT_W-1 -: STREAM_W_P] = in_data;  // last beat completes the word
    bn_we    = (state == S_LOAD_BN) && beat;
    bn_waddr = BN_AW'(cword);
    bn_wdata = in_data[2*BN_W-1:0];
  end

  // ---------------------------------------------------------------- FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cfg_q      <= '0;
      done       <= 1'b0;
      cy         <= '0;
      cx         <= '0;
      cg         <= '0;
      csub       <= '0;
      coc        <= '0;
      cword      <= '0;
      cbeat      <= '0;
      wt_buf     <= '0;
      drain_pend <= 1'b0;
      out_valid  <= 1'b0;
      out_data   <= '0;
      out_word   <= '0;
      bn_d2      <= '0;
      bn_d3      <= '0;
      for (int s = 1; s <= 4; s++) tag[s] <= '0;
    end else begin
      done  <= 1'b0;
      bn_d2 <= bn_rdata;
      bn_d3 <= bn_d2;
      tag[1] <= itag;
      for (int s = 2; s <= 4; s++) tag[s] <= tag[s-1];
      if (bit_valid) out_word[lane] <= bit_val;

      unique case (state)
        S_IDLE: begin
          if (start) begin
            cfg_q <= cfg;
            cy <= '0; cx <= '0; cg <= '0; csub <= '0; coc <= '0;
            cword <= '0; cbeat <= '0;
            drain_pend <= 1'b0;
            unique case (cfg.op)
              OP_LOAD_IMG: state <= S_LOAD_IMG;
              OP_LOAD_WT:  state <= S_LOAD_WT;
              OP_LOAD_BN:  state <= S_LOAD_BN;
              OP_RUN:      state <= S_RUN;
              OP_DRAIN:    state <= S_DRAIN;
              default:     done  <= 1'b1;
            endcase
          end
        end

        S_LOAD_IMG: if (beat) begin
          cx <= cx + 1'b1;
          if (cx == cfg_q.w - 1'b1) begin
            cx <= '0;
            cy <= cy + 1'b1;
            if (cy == cfg_q.h - 1'b1) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end

        S_LOAD_WT: if (beat) begin
          wt_buf[32'(cbeat)*STREAM_W_P +: STREAM_W_P] <= in_data;
          cbeat <= cbeat + 1'b1;
          if (32'(cbeat) == WT_BEATS - 1) begin
            cbeat <= '0;
            cword <= cword + 1'b1;
            if (cword == nwords - 1'b1) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end

        S_LOAD_BN: if (beat) begin
          cword <= cword + 1'b1;
          if (cword == (WT_AW+1)'(cfg_q.oc_count) - 1'b1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end

        S_RUN: begin
          cg <= cg + 1'b1;
          if (last_g) begin
            cg   <= '0;
            csub <= csub + 1'b1;
            if (last_sub) begin
              csub <= '0;
              coc  <= coc + 1'b1;
              if (last_oc) begin
                coc <= '0;
                cx  <= cx + 1'b1;
                if (last_px) begin
                  cx <= '0;
                  cy <= cy + 1'b1;
                  if (last_py) state <= S_FLUSH;
                end
              end
            end
          end
        end

        S_FLUSH: begin
          if (!tag[1].valid && !tag[2].valid && !tag[3].valid && !tag[4].valid) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end

        S_DRAIN: begin
          if (!drain_pend && !out_valid) begin
            drain_pend <= 1'b1;
          end else if (drain_pend) begin
            drain_pend <= 1'b0;
            out_valid  <= 1'b1;
            out_data   <= rd_center;
          end else if (out_ready) begin
            out_valid <= 1'b0;
            cg <= cg + 1'b1;
            if (cg == cfg_q.in_groups - 1'b1) begin
              cg <= '0;
              cx <= cx + 1'b1;
              if (cx == cfg_q.w - 1'b1) begin
                cx <= '0;
                cy <= cy + 1'b1;
                if (cy == cfg_q.h - 1'b1) begin
                  state <= S_IDLE;
                  done  <= 1'b1;
                end
              end
            end
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- checks
  // The output stream holds its word until it is taken.
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
  // A run call covers whole output words.
  a_oc_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    start && state == S_IDLE && cfg.op == OP_RUN |->
      (32'(cfg.oc_base) % LANES_P == 0) && (32'(cfg.oc_count) % LANES_P == 0)
      && cfg.oc_count != '0);
  // A new call is only started when idle.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> state == S_IDLE);
endmodule
