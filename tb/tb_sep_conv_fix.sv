// tb_sep_conv_fix: the first-layer separable convolution unit against a
// direct 2D convolution of signed 8-bit pixels with the reference filters,
// random padding masks, output one cycle after the input.
//
// The reference is a direct 3x3 convolution with the full 9-tap filter.
module tb_sep_conv_fix;
  import bcnn_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [IMG_CH*PIX_W-1:0] win [9];
  sf_code_t codes [IMG_CH];
  logic [2:0] row_ok = 3'b111, col_ok = 3'b111;
  logic out_valid;
  logic signed [ACC_W-1:0] out_sum;
  int checks = 0, failures = 0;

  sep_conv_fix dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s, p;
    logic [8:0] f;
    static logic [2:0] masks [4] = '{3'b111, 3'b110, 3'b011, 3'b010};
    for (int t = 0; t < 9; t++) win[t] = '0;
    for (int c = 0; c < IMG_CH; c++) codes[c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      for (int t = 0; t < 9; t++) win[t] = 24'($urandom);
      if (n < 2) for (int t = 0; t < 9; t++) win[t] = (n == 0) ? 24'h7f7f7f : 24'h808080;
      for (int c = 0; c < IMG_CH; c++) codes[c] = (n < 2) ? 5'd31 : 5'($urandom);
      row_ok = (n < 2) ? 3'b111 : masks[$urandom % 4];
      col_ok = (n < 2) ? 3'b111 : masks[$urandom % 4];
      in_valid = ($urandom % 4 != 0);
      s = 0;
      for (int c = 0; c < IMG_CH; c++) begin
        f = ref_filter(codes[c]);
        for (int t = 0; t < 9; t++) begin
          p = int'($signed(win[t][c*8 +: 8]));
          if (row_ok[t/3] && col_ok[t%3]) s += ref_tap(f, t) * p;
        end
      end
      @(posedge clk); #1;
      checks++;
      if (out_valid !== in_valid || (in_valid && out_sum !== ACC_W'(s))) begin
        failures++;
        $display("n=%0d: valid %0d sum %0d expected %0d", n, out_valid, out_sum, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
