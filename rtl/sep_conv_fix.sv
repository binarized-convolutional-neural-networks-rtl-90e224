// sep_conv_fix: separable convolution unit for the first layer (the "Conv1"
// complex), whose input is the fixed-point image rather than binary data.
//
// Each cycle it takes one 3x3 window of IN_CH-channel pixels (win[t], tap
// t = 3*row + column, channel c in bits [c*PIX_W +: PIX_W], signed two's
// complement) and the IN_CH 5-bit filter codes of one output channel. As in
// the binary unit, the filter is applied as a 3x1 vertical convolution
// followed by a 1x3 horizontal convolution; with +-1 weights every multiply is
// a conditional negation. The IN_CH channel results are summed. Taps outside
// the image (row_ok / col_ok low) contribute 0 (zero padding).
//
// Registered output: out_valid / out_sum follow in_valid by one cycle.
// One window per cycle.
//
// Origin: a separate unit for the first, non-binary layer is part of the
// published design, and its filters are binary separable like the others; the
// 8-bit signed pixel format, zero padding and 16-bit sum are this design's
// choices.
module sep_conv_fix
  import bcnn_pkg::*;
#(
  parameter int unsigned IN_CH_P = IMG_CH,
  parameter int unsigned PIX_W_P = PIX_W,
  parameter int unsigned SUM_W_P = ACC_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic [IN_CH_P*PIX_W_P-1:0]  win [9],
  input  sf_code_t                    codes [IN_CH_P],
  input  logic [2:0]                  row_ok,
  input  logic [2:0]                  col_ok,
  output logic                        out_valid,
  output logic signed [SUM_W_P-1:0]   out_sum
);
  sf_vec_t filt [IN_CH_P];

  for (genvar c = 0; c < IN_CH_P; c++) begin : g_dec
    filter_decoder u_dec (.code(codes[c]), .vec(filt[c]));
  end

  logic signed [PIX_W_P-1:0]  px;
  logic signed [SUM_W_P-1:0]  vcol [IN_CH_P][3];
  logic signed [SUM_W_P-1:0]  sum;

  always_comb begin
    sum = '0;
    px  = '0;
    for (int c = 0; c < IN_CH_P; c++) begin
      for (int j = 0; j < 3; j++) begin
        vcol[c][j] = '0;
        for (int i = 0; i < 3; i++) begin
          px = win[3*i+j][c*PIX_W_P +: PIX_W_P];
          if (row_ok[i])
            vcol[c][j] = filt[c].u[i] ? vcol[c][j] + SUM_W_P'(px) : vcol[c][j] - SUM_W_P'(px);
        end
        if (col_ok[j])
          sum = filt[c].v[j] ? sum + vcol[c][j] : sum - vcol[c][j];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sum   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_sum <= sum;
    end
  end
endmodule
