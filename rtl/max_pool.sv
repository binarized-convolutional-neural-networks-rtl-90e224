// max_pool: running maximum over the convolution sums of one pooling window.
//
// The 2x2 max pooling of the network is applied to the integer convolution
// sums of the four pixels of a window, before batch normalisation. The
// controller presents the four sums one after another: in_first starts a new
// window, in_last closes it. One cycle after the in_last input, out_valid is
// high and out_val holds the maximum. With pooling off, every input carries
// both in_first and in_last and the value passes with one cycle of latency.
//
// Origin: 2x2 max pooling after the second, fourth and sixth layers is part
// of the network; pooling the integer sums before batch normalisation, one
// value per cycle, is this design's choice.
module max_pool
  import bcnn_pkg::*;
#(
  parameter int unsigned W = ACC_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic                in_first,
  input  logic                in_last,
  input  logic signed [W-1:0] in_val,
  output logic                out_valid,
  output logic signed [W-1:0] out_val
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_val   <= '0;
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid && (in_first || in_val > out_val)) out_val <= in_val;
    end
  end
endmodule
