// tb_batch_norm: random and corner values of x, k, h; the output bit must be
// 1 exactly when k*x + h >= 0, one cycle after the input.
//
// The reference is plain integer arithmetic; widths and the zero rule are
// those chosen in batch_norm, not published ones.
module tb_batch_norm;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [15:0] x = '0, k = '0, h = '0;
  logic out_valid, out_bit;
  int checks = 0, failures = 0;

  batch_norm #(.X_W(16), .K_W(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint y;
    logic exp;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      in_valid = 1;
      x = 16'($urandom); k = 16'($urandom); h = 16'($urandom);
      case (n % 6)
        0: begin x = 16'(int'($urandom % 200) - 100); k = 16'(int'($urandom % 20) - 10); h = 16'(-(int'(k) * int'(x))); end // y = 0
        1: begin k = 16'sh7fff; x = -16'sh8000; end
        2: begin k = -16'sh8000; x = -16'sh8000; h = -16'sh8000; end
        3: begin x = 16'(int'($urandom % 64) - 32); k = 16'(int'($urandom % 64) - 32); h = 16'(int'($urandom % 64) - 32); end
        default: ;
      endcase
      y = longint'(k) * longint'(x) + longint'(h);
      exp = (y >= 0);
      @(posedge clk); #1;
      checks++;
      if (!out_valid || out_bit !== exp) begin
        failures++;
        $display("x=%0d k=%0d h=%0d: bit %0d expected %0d", x, k, h, out_bit, exp);
      end
      if ($urandom % 3 == 0) begin
        @(negedge clk); in_valid = 0;
        @(posedge clk); #1;
        checks++;
        if (out_valid) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
