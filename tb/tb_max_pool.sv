// tb_max_pool: random windows of 1 to 4 values with random gaps; checks the
// maximum and that it appears exactly one cycle after the closing input.
//
// Random stimulus; nothing here is taken from published numbers.
module tb_max_pool;
  localparam int unsigned W = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_last = 0;
  logic signed [W-1:0] in_val = '0, out_val;
  logic out_valid;
  int checks = 0, failures = 0;
  int outs_seen = 0, outs_expected = 0;

  max_pool #(.W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_q [$];
  // Output monitor: out_valid must come exactly one cycle after in_last.
  logic last_d = 0;
  always @(posedge clk) begin
    last_d <= in_valid && in_last;
    if (rst_n) begin
      if (out_valid !== last_d) begin
        failures++;
        $display("out_valid timing wrong at %0t", $time);
      end
      if (out_valid) begin
        checks++;
        outs_seen++;
        if (exp_q.size() == 0 || out_val !== W'(exp_q[0])) begin
          failures++;
          $display("max %0d expected %0d", out_val, exp_q.size() != 0 ? exp_q[0] : 0);
        end
        if (exp_q.size() != 0) void'(exp_q.pop_front());
      end
    end
  end

  initial begin
    int n, mx, v;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int win = 0; win < 3000; win++) begin
      n = (win % 3 == 0) ? 1 : 4;
      if (win % 7 == 5) n = 1 + $urandom % 4;
      mx = -100000;
      for (int k = 0; k < n; k++) begin
        @(negedge clk);
        v = int'($signed(16'($urandom)));
        if (win % 5 == 0) v = -1000 - int'($urandom % 100);  // all negative
        in_valid = 1; in_first = (k == 0); in_last = (k == n-1);
        in_val = W'(v);
        if (v > mx) mx = v;
        if (k == n-1) begin exp_q.push_back(mx); outs_expected++; end
        if ($urandom % 4 == 0) begin
          @(negedge clk);
          in_valid = 0; in_first = 0; in_last = 0; in_val = W'($urandom);
        end
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (4) @(posedge clk);
    checks++;
    if (outs_seen != outs_expected) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
