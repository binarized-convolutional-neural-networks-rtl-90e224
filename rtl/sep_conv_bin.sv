// sep_conv_bin: binary separable convolution unit (the "Conv2-5" complex).
//
// Each cycle it takes one 3x3 window of binary activations for LANES input
// channels (win[t], tap t = 3*row + column, one bit per channel) and the
// LANES 5-bit filter codes that connect those channels to one output channel.
// Every code is decoded to a vector pair (u, v). For each channel and each of
// the three columns the unit first forms the 3x1 vertical convolution
// sum_i u[i]*x[i][j], using an XOR per tap (x XOR u = 1 means the product is
// -1); it then applies the 1x3 horizontal convolution sum_j v[j]*col[j]; an
// adder tree sums the LANES channel results. That is 6 multiply-accumulates
// per channel and window instead of 9, and gives exactly the 2D convolution
// with the filter u v^T.
//
// Zero padding: row_ok / col_ok mark which window rows / columns lie inside
// the feature map; taps outside contribute 0.
//
// Successive groups of LANES input channels are accumulated: in_first starts a
// new sum, in_last marks the final group. One cycle after the in_last input,
// out_valid is high for one cycle and out_sum holds the total. Full throughput:
// one window per cycle, no stalls.
//
// Origin: the vertical 3x1 pass followed by the horizontal 1x3 pass (6
// products per channel instead of 9), products as XORs and an adder tree
// follow the published design. The lane count, the zero padding and the
// accumulation over channel groups inside the unit are this design's
// choices.
module sep_conv_bin
  import bcnn_pkg::*;
#(
  parameter int unsigned LANES_P = LANES,
  parameter int unsigned ACC_W_P = ACC_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic                       in_first,
  input  logic                       in_last,
  input  logic [LANES_P-1:0]         win [9],
  input  sf_code_t                   codes [LANES_P],
  input  logic [2:0]                 row_ok,
  input  logic [2:0]                 col_ok,
  output logic                       out_valid,
  output logic signed [ACC_W_P-1:0]  out_sum
);
  sf_vec_t filt [LANES_P];

  for (genvar c = 0; c < LANES_P; c++) begin : g_dec
    filter_decoder u_dec (.code(codes[c]), .vec(filt[c]));
  end

  // Vertical (3x1) then horizontal (1x3) convolution per channel.
  logic signed [3:0]          vcol  [LANES_P][3];  // -3..3
  logic signed [4:0]          hsum  [LANES_P];     // -9..9
  logic signed [ACC_W_P-1:0]  psum;

  always_comb begin
    psum = '0;
    for (int c = 0; c < LANES_P; c++) begin
      hsum[c] = '0;
      for (int j = 0; j < 3; j++) begin
        vcol[c][j] = '0;
        for (int i = 0; i < 3; i++) begin
          if (row_ok[i])
            vcol[c][j] = vcol[c][j] + ((win[3*i+j][c] ^ filt[c].u[i]) ? -4'sd1 : 4'sd1);
        end
        if (col_ok[j])
          hsum[c] = filt[c].v[j] ? hsum[c] + 5'(vcol[c][j]) : hsum[c] - 5'(vcol[c][j]);
      end
      psum = psum + ACC_W_P'(hsum[c]);
    end
  end

  // Accumulation across channel groups.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sum   <= '0;
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid) out_sum <= in_first ? psum : out_sum + psum;
    end
  end
endmodule
