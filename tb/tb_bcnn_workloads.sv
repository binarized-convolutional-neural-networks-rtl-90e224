// tb_bcnn_workloads: the other networks of the same study that fit the
// accelerator at its default parameters, run end to end side by side:
//   SVHN    3x32x32 image, 64-64-P-128-128-P-256-256-P
//   MNIST   28x28 grey image, 64-64-P-128-128-P-256-256-P
//   deeper  3x32x32 image, 128-128-P-256-256-P-512-512-P-512-512-P
// Each instance of tb_bcnn_net has its own accelerator, host model and
// reference; it streams a random image and random codes, runs every layer in
// as many calls as the weight RAM needs, and compares every drained word and
// the cycle count of every run call. This wrapper waits for all three, adds
// up their checks and failures, and requires that across the three runs each
// mechanism (Conv-1 and binary calls, pooled and unpooled calls, layers split
// over several calls, input stalls, output back-pressure, negative scales)
// happened at least once. The MNIST run also exercises pooling of an odd map
// (7x7 to 3x3).
//
// Layer sizes are those of the published networks; the MNIST image is sent
// as three channels with two of them zero, and all data is random.
module tb_bcnn_workloads;
  tb_bcnn_net #(.NET(2), .STANDALONE(1'b0)) u_svhn ();
  tb_bcnn_net #(.NET(3), .STANDALONE(1'b0)) u_mnist ();
  tb_bcnn_net #(.NET(4), .STANDALONE(1'b0)) u_deeper ();

  int checks = 0, failures = 0;

  initial begin
    #(64'd100_000_000);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  initial begin
    int conv1, bin, pooled, unpooled, split, in_st, out_st, negk;
    wait (u_svhn.fin && u_mnist.fin && u_deeper.fin);
    checks   = u_svhn.checks + u_mnist.checks + u_deeper.checks;
    failures = u_svhn.failures + u_mnist.failures + u_deeper.failures;
    conv1    = u_svhn.n_conv1 + u_mnist.n_conv1 + u_deeper.n_conv1;
    bin      = u_svhn.n_bin + u_mnist.n_bin + u_deeper.n_bin;
    pooled   = u_svhn.n_pool + u_mnist.n_pool + u_deeper.n_pool;
    unpooled = u_svhn.n_nopool + u_mnist.n_nopool + u_deeper.n_nopool;
    split    = u_svhn.n_split + u_mnist.n_split + u_deeper.n_split;
    in_st    = u_svhn.n_in_stall + u_mnist.n_in_stall + u_deeper.n_in_stall;
    out_st   = u_svhn.n_out_stall + u_mnist.n_out_stall + u_deeper.n_out_stall;
    negk     = u_svhn.n_negk + u_mnist.n_negk + u_deeper.n_negk;
    $display("all three: conv1=%0d binary=%0d pooled=%0d unpooled=%0d split_layers=%0d in_stalls=%0d out_stalls=%0d neg_k=%0d",
             conv1, bin, pooled, unpooled, split, in_st, out_st, negk);
    if (conv1 == 0)    begin failures++; $display("no Conv-1 call"); end
    if (bin == 0)      begin failures++; $display("no binary call"); end
    if (pooled == 0)   begin failures++; $display("no pooled call"); end
    if (unpooled == 0) begin failures++; $display("no unpooled call"); end
    if (split == 0)    begin failures++; $display("no split layer"); end
    if (in_st == 0)    begin failures++; $display("no input stall"); end
    if (out_st == 0)   begin failures++; $display("no output back-pressure"); end
    if (negk == 0)     begin failures++; $display("no negative scale"); end
    checks += 8;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
