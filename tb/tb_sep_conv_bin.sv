// tb_sep_conv_bin: the binary separable convolution unit against a direct 2D
// convolution. Random windows, filter codes and padding masks, sums over 1 to
// 8 channel groups; the total must match sum_c sum_taps F_c[t] * x_c[t] over
// the taps inside the map, and appear one cycle after the last group.
//
// The reference is a direct 3x3 convolution with the full 9-tap filter, so
// it checks that the separable 6-product form gives the same result.
module tb_sep_conv_bin;
  import bcnn_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned L = 64;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_last = 0;
  logic [L-1:0] win [9];
  sf_code_t codes [L];
  logic [2:0] row_ok = 3'b111, col_ok = 3'b111;
  logic out_valid;
  logic signed [ACC_W-1:0] out_sum;
  int checks = 0, failures = 0;

  sep_conv_bin #(.LANES_P(L), .ACC_W_P(ACC_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_group();
    int s = 0;
    logic [8:0] f;
    for (int c = 0; c < L; c++) begin
      f = ref_filter(codes[c]);
      for (int t = 0; t < 9; t++)
        if (row_ok[t/3] && col_ok[t%3])
          s += ref_tap(f, t) * (win[t][c] ? 1 : -1);
    end
    return s;
  endfunction

  initial begin
    int groups, total;
    static logic [2:0] masks [4] = '{3'b111, 3'b110, 3'b011, 3'b010};
    for (int t = 0; t < 9; t++) win[t] = '0;
    for (int c = 0; c < L; c++) codes[c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      groups = 1 + $urandom % 8;
      total = 0;
      for (int g = 0; g < groups; g++) begin
        @(negedge clk);
        for (int t = 0; t < 9; t++) win[t] = {$urandom, $urandom};
        for (int c = 0; c < L; c++) codes[c] = 5'($urandom);
        if (n < 4) begin   // extreme sums: all taps agree / disagree
          for (int t = 0; t < 9; t++) win[t] = '1;
          for (int c = 0; c < L; c++) codes[c] = (n % 2 != 0) ? 5'd31 : 5'd0;
        end
        row_ok = masks[$urandom % 4];
        col_ok = masks[$urandom % 4];
        in_valid = 1; in_first = (g == 0); in_last = (g == groups - 1);
        total += ref_group();
        @(posedge clk); #1;
        checks++;
        if (out_valid !== (g == groups - 1)) begin
          failures++;
          $display("n=%0d g=%0d: out_valid=%0d", n, g, out_valid);
        end
        if (g == groups - 1) begin
          checks++;
          if (out_sum !== ACC_W'(total)) begin
            failures++;
            $display("n=%0d: sum %0d expected %0d", n, out_sum, total);
          end
        end
        if ($urandom % 5 == 0) begin  // idle cycle must not disturb the sum
          @(negedge clk); in_valid = 0; in_first = 1; in_last = 1;
          for (int t = 0; t < 9; t++) win[t] = {$urandom, $urandom};
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
