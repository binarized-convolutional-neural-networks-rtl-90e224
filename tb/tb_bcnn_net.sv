// tb_bcnn_net: end-to-end test of the accelerator. A host model streams a
// random image, then for each convolutional layer loads weights
// and batch-norm parameters and runs the layer, in one or more calls on
// consecutive output-channel ranges when the weights do not fit the weight
// RAM (or, in the small network, to force a split). After every layer the
// feature map is streamed out and compared word by word with a reference
// model computed here directly from 2D convolutions with the reference filters.
//
// NET selects the network (P = 2x2 max pooling after the layer):
//   0  small six-layer network on an 8x8 image (channels 64..192)
//   1  CIFAR-10: 3x32x32 image, 128-128-P-256-256-P-512-512-P
//   2  SVHN: 3x32x32 image, 64-64-P-128-128-P-256-256-P
//   3  MNIST: 28x28 grey image (sent as three channels, two of them zero),
//      64-64-P-128-128-P-256-256-P; the last pooling turns 7x7 into 3x3
//   4  deeper CIFAR-10 variant: 3x32x32, 128-128-P-256-256-P-512-512-P-
//      512-512-P (eight layers)
// The accelerator is instantiated with its default parameters in all cases.
// With STANDALONE = 1 the module checks the mechanisms, prints the result
// line and ends the simulation; with STANDALONE = 0 it only sets fin, so that
// a wrapper can run several networks side by side and sum their counts.
//
// Checked besides the data: the cycle count of every run call (one window per
// cycle, out_pixels * subs * oc_count * groups plus a fixed pipeline latency),
// and that each mechanism happened at least once: Conv-1 calls, binary calls,
// pooled and unpooled calls, layers split over several calls, input-stream
// stalls, output-stream back-pressure, and a negative batch-norm scale.
//
// Layer sizes of the full run are those of the published CIFAR-10 network;
// the reduced network, the random weights and image, and the way layers are
// split into calls are this testbench's own.
module tb_bcnn_net #(
  parameter int NET        = 0,
  parameter bit STANDALONE = 1'b1
);
  import bcnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned WT_DEPTH = 1024;  // the accelerator's default
  localparam int unsigned RUN_LAT  = 6;     // start-to-done overhead of a run call
  localparam int unsigned WT_BEATS_TB = (LANES * CODE_W + 63) / 64;

  logic clk = 0, rst_n = 0;
  logic start = 0;
  layer_cfg_t cfg;
  logic busy, done;
  logic in_valid = 0, in_ready;
  logic [STREAM_W-1:0] in_data = '0;
  logic out_valid, out_ready = 0;
  logic [LANES-1:0] out_data;

  bcnn_sf_accel dut (.*);

  always #5 clk = ~clk;

  localparam string NAME = NET == 0 ? "small" : NET == 1 ? "CIFAR-10" :
                           NET == 2 ? "SVHN"  : NET == 3 ? "MNIST" : "deeper";
  localparam int MAXL = 8;

  int checks = 0, failures = 0;
  bit fin = 1'b0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // Mechanism counters.
  int n_conv1 = 0, n_bin = 0, n_pool = 0, n_nopool = 0, n_split = 0;
  int n_in_stall = 0, n_out_stall = 0, n_negk = 0;

  initial begin
    #(NET == 0 ? 64'd5_000_000 : 64'd80_000_000);
    if (!STANDALONE) wait (0);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ streams
  logic [STREAM_W-1:0] in_q [$];
  logic [LANES-1:0]    out_q [$];
  int                  stall_pct;

  always @(posedge clk) begin
    if (in_valid && in_ready) void'(in_q.pop_front());
    if (in_ready && !in_valid) n_in_stall++;
    if (out_valid && out_ready) out_q.push_back(out_data);
    if (out_valid && !out_ready) n_out_stall++;
  end
  always @(negedge clk) begin
    in_valid  <= (in_q.size() > 0) && (($urandom % 100) >= stall_pct);
    in_data   <= (in_q.size() > 0) ? in_q[0] : '0;
    out_ready <= ($urandom % 100) >= stall_pct;
  end

  task automatic do_call(layer_cfg_t c, output longint cycles);
    longint t0;
    @(negedge clk);
    cfg = c;
    start = 1;
    @(posedge clk);
    t0 = cycle;
    @(negedge clk);
    start = 0;
    do @(posedge clk); while (!done);
    cycles = cycle - t0;
  endtask

  // ------------------------------------------------------------ network
  int n_layers = 6;
  int cin [MAXL], cout [MAXL], hin [MAXL], max_oc [MAXL];
  bit pool [MAXL];
  int img_dim;

  // Data, reference.
  int         img [];                  // (y*W + x)*3 + c, signed 8 bit
  logic [4:0] code [MAXL][];              // oc*cin + ic
  int         bn_k [MAXL][], bn_h [MAXL][];
  logic [63:0] fm_ref [MAXL+1][];           // fm_ref[l+1] = output of layer l

  function automatic int idx3(int y, int x, int g, int w, int gn);
    return (y * w + x) * gn + g;
  endfunction

  task automatic make_reference(int l);
    int h = hin[l], w = hin[l];
    int oh = pool[l] ? h / 2 : h;
    int gi = (l == 0) ? 1 : cin[l] / 64, go = cout[l] / 64;
    logic [63:0] plane [];
    int s, best, y, x, ry, rx;
    logic [8:0] f;
    fm_ref[l+1] = new[oh * oh * go];
    foreach (fm_ref[l+1][i]) fm_ref[l+1][i] = '0;
    if (l > 0) begin
      plane = new[cout[l] * gi * 9];
      for (int oc = 0; oc < cout[l]; oc++)
        for (int ic = 0; ic < cin[l]; ic++) begin
          f = ref_filter(code[l][oc*cin[l] + ic]);
          for (int t = 0; t < 9; t++)
            plane[(oc*gi + ic/64)*9 + t][ic%64] = f[t];
        end
    end
    for (int oc = 0; oc < cout[l]; oc++)
      for (int py = 0; py < oh; py++)
        for (int px = 0; px < oh; px++) begin
          best = -1000000;
          for (int sub = 0; sub < (pool[l] ? 4 : 1); sub++) begin
            y = pool[l] ? 2*py + sub/2 : py;
            x = pool[l] ? 2*px + sub%2 : px;
            s = 0;
            for (int t = 0; t < 9; t++) begin
              ry = y + t/3 - 1; rx = x + t%3 - 1;
              if (ry < 0 || ry >= h || rx < 0 || rx >= w) continue;
              if (l == 0) begin
                for (int c = 0; c < 3; c++)
                  s += ref_tap(ref_filter(code[0][oc*3 + c]), t) * img[(ry*w + rx)*3 + c];
              end else begin
                for (int g = 0; g < gi; g++)
                  s += 64 - 2 * $countones(fm_ref[l][idx3(ry, rx, g, w, gi)]
                                           ^ plane[(oc*gi + g)*9 + t]);
              end
            end
            if (s > best) best = s;
          end
          fm_ref[l+1][idx3(py, px, oc/64, oh, go)][oc%64] =
            (longint'(bn_k[l][oc]) * best + longint'(bn_h[l][oc])) >= 0;
        end
  endtask

  task automatic check_drain(int l, logic src);
    layer_cfg_t c;
    longint cyc;
    int oh = pool[l] ? hin[l] / 2 : hin[l];
    int go = cout[l] / 64;
    int bad = 0, ones = 0;
    c = '0;
    c.op = OP_DRAIN; c.src_buf = src;
    c.h = DIM_W'(oh); c.w = DIM_W'(oh); c.in_groups = GRP_W'(go);
    out_q.delete();
    do_call(c, cyc);
    checks++;
    if (out_q.size() != oh * oh * go) begin
      failures++;
      $display("%s layer %0d: drained %0d words, expected %0d", NAME, l+1, out_q.size(), oh*oh*go);
    end else begin
      for (int i = 0; i < out_q.size(); i++) begin
        checks++;
        if (out_q[i] !== fm_ref[l+1][i]) begin
          failures++;
          bad++;
          if (bad < 5) $display("%s layer %0d word %0d: %h expected %h", NAME, l+1, i, out_q[i], fm_ref[l+1][i]);
        end
      end
    end
    foreach (out_q[i]) ones += $countones(out_q[i]);
    $display("%s layer %0d: %0d words compared, %0d wrong, %0d of %0d activations +1",
             NAME, l+1, out_q.size(), bad, ones, 64 * out_q.size());
  endtask

  initial begin
    layer_cfg_t c;
    longint cyc, exp_cyc, total_run;
    int gi, n_calls, ocb, occ, wpc, oh;
    logic src;
    logic [WT_BEATS_TB*64-1:0] word;

    cfg = '0;
    stall_pct = (NET == 0) ? 20 : 3;
    pool   = '{0, 1, 0, 1, 0, 1, 0, 1};
    max_oc = '{512, 512, 512, 512, 512, 512, 512, 512};
    case (NET)
      0: begin
        img_dim = 8;
        cin  = '{3, 64, 64, 128, 128, 192, 0, 0};
        cout = '{64, 64, 128, 128, 192, 128, 0, 0};
        hin  = '{8, 8, 4, 4, 2, 2, 0, 0};
        max_oc = '{512, 512, 512, 64, 64, 512, 0, 0};
      end
      1: begin
        img_dim = 32;
        cin  = '{3, 128, 128, 256, 256, 512, 0, 0};
        cout = '{128, 128, 256, 256, 512, 512, 0, 0};
        hin  = '{32, 32, 16, 16, 8, 8, 0, 0};
      end
      2: begin
        img_dim = 32;
        cin  = '{3, 64, 64, 128, 128, 256, 0, 0};
        cout = '{64, 64, 128, 128, 256, 256, 0, 0};
        hin  = '{32, 32, 16, 16, 8, 8, 0, 0};
      end
      3: begin
        img_dim = 28;
        cin  = '{3, 64, 64, 128, 128, 256, 0, 0};
        cout = '{64, 64, 128, 128, 256, 256, 0, 0};
        hin  = '{28, 28, 14, 14, 7, 7, 0, 0};
      end
      default: begin
        n_layers = 8;
        img_dim = 32;
        cin  = '{3, 128, 128, 256, 256, 512, 512, 512};
        cout = '{128, 128, 256, 256, 512, 512, 512, 512};
        hin  = '{32, 32, 16, 16, 8, 8, 4, 4};
      end
    endcase

    // Random image, weights, batch-norm parameters.
    img = new[img_dim * img_dim * 3];
    foreach (img[i]) img[i] = (NET == 3 && i % 3 != 0) ? 0 : int'($signed(8'($urandom)));
    for (int l = 0; l < n_layers; l++) begin
      code[l] = new[cout[l] * cin[l]];
      foreach (code[l][i]) code[l][i] = 5'($urandom);
      bn_k[l] = new[cout[l]];
      bn_h[l] = new[cout[l]];
      for (int oc = 0; oc < cout[l]; oc++) begin
        bn_k[l][oc] = 1 + int'($urandom % 40);
        if ($urandom % 4 == 0) bn_k[l][oc] = -bn_k[l][oc];
        bn_h[l][oc] = bn_k[l][oc] * (int'($urandom % ((l == 0) ? 400 : 24)) - ((l == 0) ? 200 : 12));
      end
    end
    for (int l = 0; l < n_layers; l++) make_reference(l);

    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // Image.
    for (int i = 0; i < img_dim * img_dim; i++)
      in_q.push_back(64'({8'(img[3*i+2]), 8'(img[3*i+1]), 8'(img[3*i])}));
    c = '0;
    c.op = OP_LOAD_IMG; c.h = DIM_W'(img_dim); c.w = DIM_W'(img_dim);
    do_call(c, cyc);
    checks++;
    if (in_q.size() != 0) begin failures++; $display("image not fully taken"); end

    total_run = 0;
    for (int l = 0; l < n_layers; l++) begin
      gi  = (l == 0) ? 1 : cin[l] / 64;
      wpc = (WT_DEPTH / gi) / 64 * 64;                 // channels per call
      if (wpc > max_oc[l]) wpc = max_oc[l];
      if (wpc > cout[l]) wpc = cout[l];
      n_calls = cout[l] / wpc;
      src = (l == 0) ? 1'b1 : ((l % 2 == 1) ? 1'b0 : 1'b1);
      oh  = pool[l] ? hin[l] / 2 : hin[l];
      if (n_calls > 1) n_split++;
      for (int call = 0; call < n_calls; call++) begin
        ocb = call * wpc;
        occ = wpc;
        // Weights: one word per (oc, group).
        for (int oc = ocb; oc < ocb + occ; oc++)
          for (int g = 0; g < gi; g++) begin
            word = '0;
            for (int k = 0; k < 64; k++)
              if (g*64 + k < cin[l]) word[5*k +: 5] = code[l][oc*cin[l] + g*64 + k];
            for (int b = 0; b < WT_BEATS_TB; b++) in_q.push_back(word[64*b +: 64]);
          end
        c = '0;
        c.op = OP_LOAD_WT; c.first = (l == 0); c.in_groups = GRP_W'(gi);
        c.oc_base = OC_W'(ocb); c.oc_count = OC_W'(occ);
        do_call(c, cyc);
        for (int oc = ocb; oc < ocb + occ; oc++) begin
          in_q.push_back(64'({16'(bn_k[l][oc]), 16'(bn_h[l][oc])}));
          if (bn_k[l][oc] < 0) n_negk++;
        end
        c.op = OP_LOAD_BN;
        do_call(c, cyc);
        checks++;
        if (in_q.size() != 0) begin failures++; $display("%s layer %0d: stream not fully taken", NAME, l+1); end
        // Run.
        c = '0;
        c.op = OP_RUN; c.first = (l == 0); c.pool = pool[l] != 0; c.src_buf = src;
        c.h = DIM_W'(hin[l]); c.w = DIM_W'(hin[l]);
        c.in_groups = GRP_W'(gi); c.out_groups = GRP_W'(cout[l] / 64);
        c.oc_base = OC_W'(ocb); c.oc_count = OC_W'(occ);
        do_call(c, cyc);
        exp_cyc = longint'(oh) * oh * (pool[l] ? 4 : 1) * occ * gi + longint'(RUN_LAT);
        checks++;
        if (cyc != exp_cyc) begin
          failures++;
          $display("%s layer %0d call %0d: %0d cycles, expected %0d", NAME, l+1, call, cyc, exp_cyc);
        end
        total_run += cyc;
        if (l == 0) n_conv1++; else n_bin++;
        if (pool[l]) n_pool++; else n_nopool++;
      end
      check_drain(l, ~src);
    end
    $display("%s: run cycles over all layers: %0d", NAME, total_run);
    $display("%s mechanisms: conv1=%0d binary=%0d pooled=%0d unpooled=%0d split_layers=%0d in_stalls=%0d out_stalls=%0d neg_k=%0d",
             NAME, n_conv1, n_bin, n_pool, n_nopool, n_split, n_in_stall, n_out_stall, n_negk);
    if (!STANDALONE) begin
      fin = 1'b1;
      wait (0);
    end
    if (n_conv1 == 0)     begin failures++; $display("no Conv-1 call"); end
    if (n_bin == 0)       begin failures++; $display("no binary call"); end
    if (n_pool == 0)      begin failures++; $display("no pooled call"); end
    if (n_nopool == 0)    begin failures++; $display("no unpooled call"); end
    if (n_split == 0)     begin failures++; $display("no split layer"); end
    if (n_in_stall == 0)  begin failures++; $display("no input stall"); end
    if (n_out_stall == 0) begin failures++; $display("no output back-pressure"); end
    if (n_negk == 0)      begin failures++; $display("no negative scale"); end
    checks += 8;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
