// tb_accel_ctrl: the controller on its own, with the RAMs and the datapath
// replaced by small models in the testbench.
//
// Checked: image, weight and batch-norm loads (write strobes, addresses, data
// assembled from beats, done); for two run calls (a pooled binary layer
// covering output channels 64..191 of 256, and an unpooled Conv-1 layer on an
// odd-sized image) the complete issue sequence of window coordinates, weight
// and batch-norm addresses, the padding masks and group/pool flags at the
// stages where the datapath expects them, the batch-norm parameters at stage
// 3, the destination, coordinates and content of every output word, and the
// cycle count; and a drain of a feature map under random back-pressure.
//
// The expected issue order, flags and cycle counts are those of the call
// protocol chosen for this design, not published numbers.
module tb_accel_ctrl;
  import bcnn_pkg::*;

  localparam int unsigned WT_W = LANES * CODE_W;

  logic clk = 0, rst_n = 0;
  logic start = 0;
  layer_cfg_t cfg, cfg_q;
  logic busy, done;
  logic in_valid = 0, in_ready;
  logic [STREAM_W-1:0] in_data = '0;
  logic out_valid, out_ready = 0;
  logic [LANES-1:0] out_data;
  logic img_wr_en, fm_wr_en;
  logic [DIM_W-1:0] wr_y, wr_x, wr_wq, rd_y, rd_x, rd_wq;
  logic [GRP_W-1:0] wr_g, wr_gn, rd_g, rd_gn;
  logic [IMG_CH*PIX_W-1:0] img_wr_data;
  logic [LANES-1:0] fm_wr_data;
  logic rd_en;
  logic [LANES-1:0] rd_center = '0;
  logic wt_we, wt_re, bn_we, bn_re;
  logic [9:0] wt_waddr, wt_raddr;
  logic [WT_W-1:0] wt_wdata;
  logic [8:0] bn_waddr, bn_raddr;
  logic [2*BN_W-1:0] bn_wdata, bn_rdata = '0;
  logic conv_valid, conv_first, conv_last;
  logic [2:0] row_ok, col_ok;
  logic pool_first, pool_last;
  logic signed [BN_W-1:0] bn_k, bn_h;
  logic bit_valid = 0, bit_val = 0;

  accel_ctrl dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("%0t: %s", $time, msg);
  endtask

  // ------------------------------------------------------------ models
  logic [2*BN_W-1:0] bn_mem [512];
  function automatic logic [LANES-1:0] center_of(int y, int x, int g);
    return {16'hc0de, 16'(y), 16'(x), 16'(g)};
  endfunction
  always @(posedge clk) begin
    if (bn_we) bn_mem[bn_waddr] <= bn_wdata;
    if (bn_re) bn_rdata <= bn_mem[bn_raddr];
    if (rd_en) rd_center <= center_of(int'(rd_y), int'(rd_x), int'(rd_g));
  end

  // Datapath timing model: conv sum at stage 2 on the last group, pooled
  // value at stage 3 on the last sub-pixel, output bit at stage 4.
  function automatic logic bit_hash(int n);
    return 1'(((n * 2654435761) >> 7) ^ (n >> 3));
  endfunction
  logic v2 = 0, v3 = 0;
  int   nbit = 0;
  always @(posedge clk) begin
    v2 <= conv_valid && conv_last;
    v3 <= v2 && pool_last;
    bit_valid <= v3;
    bit_val   <= bit_hash(nbit);
    if (v3) nbit <= nbit + 1;
  end

  // Input stream.
  logic [STREAM_W-1:0] in_q [$];
  always @(posedge clk) if (in_valid && in_ready) void'(in_q.pop_front());
  always @(negedge clk) begin
    in_valid  <= (in_q.size() > 0) && ($urandom % 4 != 0);
    in_data   <= (in_q.size() > 0) ? in_q[0] : '0;
    out_ready <= ($urandom % 3 != 0);
  end

  task automatic do_call(layer_cfg_t c, output longint cycles);
    longint t0;
    @(negedge clk);
    cfg = c; start = 1;
    @(posedge clk);
    t0 = cycle;
    @(negedge clk);
    start = 0;
    do @(posedge clk); while (!done);
    cycles = cycle - t0;
  endtask

  // ------------------------------------------------------------ run checker
  // Expected issue sequence, built by the test before a run call.
  typedef struct {
    int y, x, g, wt, oc;
    logic [2:0] rok, cok;
    logic first_g, last_g, first_sub, last_sub;
  } issue_t;
  issue_t exp_issue [$];
  issue_t st [1:3];
  logic   stv [1:3];
  typedef struct { int oy, ox, og; logic [LANES-1:0] data; } word_t;
  word_t exp_word [$];
  bit    run_active = 0;

  always @(posedge clk) begin
    issue_t e;
    // stage 0: read addresses
    if (run_active && wt_re) begin
      checks++;
      if (exp_issue.size() == 0) fail("issue beyond the expected sequence");
      else begin
        e = exp_issue.pop_front();
        if (int'(rd_y) != e.y || int'(rd_x) != e.x || int'(rd_g) != e.g || int'(wt_raddr) != e.wt || int'(bn_raddr) != e.oc || !rd_en)
          fail($sformatf("issue (%0d,%0d,g%0d,w%0d,oc%0d) expected (%0d,%0d,g%0d,w%0d,oc%0d)",
                         rd_y, rd_x, rd_g, wt_raddr, bn_raddr, e.y, e.x, e.g, e.wt, e.oc));
        st[1] <= e;
      end
    end
    stv[1] <= run_active && wt_re;
    st[2] <= st[1]; stv[2] <= stv[1];
    st[3] <= st[2]; stv[3] <= stv[2];
    // stage 1: convolution control
    if (stv[1]) begin
      checks++;
      if (!conv_valid || conv_first != st[1].first_g || conv_last != st[1].last_g ||
          row_ok != st[1].rok || col_ok != st[1].cok)
        fail($sformatf("stage 1 flags v%0d f%0d l%0d r%b c%b, expected f%0d l%0d r%b c%b",
                       conv_valid, conv_first, conv_last, row_ok, col_ok,
                       st[1].first_g, st[1].last_g, st[1].rok, st[1].cok));
    end else if (conv_valid) fail("conv_valid without an issue");
    // stage 2: pooling control
    if (stv[2] && st[2].last_g) begin
      checks++;
      if (pool_first != st[2].first_sub || pool_last != st[2].last_sub)
        fail("stage 2 pool flags");
    end
    // stage 3: batch-norm parameters
    if (stv[3] && st[3].last_g && st[3].last_sub) begin
      checks++;
      if ({bn_k, bn_h} != bn_mem[st[3].oc]) fail("stage 3 batch-norm parameters");
    end
    // output words
    if (fm_wr_en) begin
      checks++;
      if (exp_word.size() == 0) fail("unexpected output word");
      else begin
        word_t w;
        w = exp_word.pop_front();
        if (int'(wr_y) != w.oy || int'(wr_x) != w.ox || int'(wr_g) != w.og || fm_wr_data != w.data)
          fail($sformatf("word (%0d,%0d,g%0d) %h expected (%0d,%0d,g%0d) %h",
                         wr_y, wr_x, wr_g, fm_wr_data, w.oy, w.ox, w.og, w.data));
      end
    end
  end

  task automatic run_and_check(layer_cfg_t c, int wq_out);
    int oh = c.pool ? int'(c.h) / 2 : int'(c.h);
    int ow = c.pool ? int'(c.w) / 2 : int'(c.w);
    int gn = c.first ? 1 : int'(c.in_groups);
    int ns = c.pool ? 4 : 1;
    int y, x, n = nbit;
    longint cyc, exp_cyc;
    issue_t e;
    word_t  w;
    exp_issue.delete();
    exp_word.delete();
    for (int py = 0; py < oh; py++)
      for (int px = 0; px < ow; px++)
        for (int oc = 0; oc < c.oc_count; oc++) begin
          if (oc % LANES == 0) w.data = '0;
          for (int s = 0; s < ns; s++)
            for (int g = 0; g < gn; g++) begin
              y = c.pool ? 2*py + s/2 : py;
              x = c.pool ? 2*px + s%2 : px;
              e.y = y; e.x = x; e.g = g; e.oc = oc;
              e.wt = c.first ? oc : oc * gn + g;
              e.rok = {y + 1 < c.h, 1'b1, y > 0};
              e.cok = {x + 1 < c.w, 1'b1, x > 0};
              e.first_g = (g == 0); e.last_g = (g == gn - 1);
              e.first_sub = (s == 0); e.last_sub = (s == ns - 1);
              exp_issue.push_back(e);
            end
          w.data[oc % LANES] = bit_hash(n);
          n++;
          if (oc % LANES == LANES - 1) begin
            w.oy = py; w.ox = px; w.og = (int'(c.oc_base) + oc) / LANES;
            exp_word.push_back(w);
          end
        end
    exp_cyc = longint'(exp_issue.size()) + 6;
    run_active = 1;
    do_call(c, cyc);
    run_active = 0;
    repeat (2) @(posedge clk);
    checks++;
    if (exp_issue.size() != 0 || exp_word.size() != 0)
      fail($sformatf("%0d issues and %0d words missing", exp_issue.size(), exp_word.size()));
    checks++;
    if (cyc != exp_cyc) fail($sformatf("run took %0d cycles, expected %0d", cyc, exp_cyc));
    checks++;
    if (wr_wq != DIM_W'(wq_out)) fail("output map width in blocks");
  endtask

  // ------------------------------------------------------------ test
  initial begin
    layer_cfg_t c;
    longint cyc;
    logic [WT_W-1:0] words [128];
    logic [5*64-1:0] wbuf;
    int nw, nimg;
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // Image load: 3x5 pixels.
    nimg = 0;
    for (int i = 0; i < 15; i++) in_q.push_back({$urandom, 8'h00, 24'(i * 7919)});
    c = '0; c.op = OP_LOAD_IMG; c.h = 3; c.w = 5;
    fork
      do_call(c, cyc);
      begin
        while (nimg < 15) begin
          @(posedge clk);
          if (img_wr_en) begin
            checks++;
            if (int'(wr_y) != nimg / 5 || int'(wr_x) != nimg % 5 || wr_g != 0 || wr_wq != 2 ||
                wr_gn != 1 || img_wr_data != 24'(nimg * 7919))
              fail($sformatf("image beat %0d written at (%0d,%0d) data %h", nimg, wr_y, wr_x, img_wr_data));
            nimg++;
          end
        end
      end
    join
    checks++;
    if (busy) fail("busy after image load");

    // Weight load: 64 output channels x 2 groups = 128 words of 5 beats.
    for (int i = 0; i < 128; i++) begin
      wbuf = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom,
              $urandom, $urandom, $urandom};
      words[i] = wbuf[WT_W-1:0];
      for (int b = 0; b < 5; b++) in_q.push_back(wbuf[64*b +: 64]);
    end
    c = '0; c.op = OP_LOAD_WT; c.in_groups = 2; c.oc_count = 64;
    nw = 0;
    fork
      do_call(c, cyc);
      begin
        while (nw < 128) begin
          @(posedge clk);
          if (wt_we) begin
            checks++;
            if (int'(wt_waddr) != nw || wt_wdata != words[nw])
              fail($sformatf("weight word %0d at %0d wrong", nw, wt_waddr));
            nw++;
          end
        end
      end
    join
    checks++;
    if (in_q.size() != 0) fail("weight beats left over");

    // Batch-norm load: 128 pairs.
    for (int i = 0; i < 128; i++) in_q.push_back({32'($urandom), 32'($urandom)});
    c = '0; c.op = OP_LOAD_BN; c.oc_count = 128;
    do_call(c, cyc);
    checks++;
    if (in_q.size() != 0) fail("batch-norm beats left over");

    // Pooled binary run: 6x6 input, 2 groups, channels 64..191 of 256.
    c = '0; c.op = OP_RUN; c.pool = 1; c.h = 6; c.w = 6; c.in_groups = 2;
    c.out_groups = 4; c.oc_base = 64; c.oc_count = 128;
    run_and_check(c, 1);

    // Unpooled Conv-1 run on a 5x7 image.
    c = '0; c.op = OP_RUN; c.first = 1; c.src_buf = 1; c.h = 5; c.w = 7;
    c.in_groups = 0; c.out_groups = 1; c.oc_base = 0; c.oc_count = 64;
    run_and_check(c, 3);

    // Drain a 3x4 map of 2 groups under back-pressure.
    c = '0; c.op = OP_DRAIN; c.h = 3; c.w = 4; c.in_groups = 2;
    nw = 0;
    fork
      do_call(c, cyc);
      begin
        while (nw < 24) begin
          @(posedge clk);
          if (out_valid && out_ready) begin
            checks++;
            if (out_data != center_of(nw / 8, (nw / 2) % 4, nw % 2))
              fail($sformatf("drain word %0d: %h", nw, out_data));
            nw++;
          end
        end
      end
    join
    repeat (5) @(posedge clk);
    checks++;
    if (out_valid || busy) fail("drain did not end cleanly");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
