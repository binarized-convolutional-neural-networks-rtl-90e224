// batch_norm: batch normalisation followed by binarisation.
//
// At inference, batch normalisation of a sum x is an affine map
// gamma*(x - mu)/sigma + beta, and the binarised activation keeps only its
// sign. The map is folded offline into two signed integers per output channel,
// k and h, scaled by a common factor, and the unit outputs
// out_bit = (k*x + h >= 0), i.e. +1 (bit 1) or -1 (bit 0).
// A negative k handles a negative gamma. One multiply and one add.
// Registered: out_valid / out_bit follow in_valid by one cycle.
//
// Origin: batch normalisation followed by a sign activation is what the
// network uses; folding it into one integer multiply-add per channel, the
// 16-bit widths and the rule that a zero result gives +1 are this design's
// choices.
module batch_norm
  import bcnn_pkg::*;
#(
  parameter int unsigned X_W = ACC_W,
  parameter int unsigned K_W = BN_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic signed [X_W-1:0] x,
  input  logic signed [K_W-1:0] k,
  input  logic signed [K_W-1:0] h,
  output logic                  out_valid,
  output logic                  out_bit
);
  localparam int unsigned Y_W = X_W + K_W + 1;
  logic signed [Y_W-1:0] y;

  always_comb y = Y_W'(k) * Y_W'(x) + Y_W'(h);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_bit   <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_bit <= !y[Y_W-1];
    end
  end
endmodule
