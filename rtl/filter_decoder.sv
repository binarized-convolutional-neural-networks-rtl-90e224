// filter_decoder: turns a 5-bit rank-1 filter code into the two 3-element
// binary vectors (u, v) whose outer product is the 3x3 filter.
//
// Weights are stored and transferred as 5-bit codes, since a binary rank-1
// 3x3 filter has only 32 distinct values; the convolution datapath needs the
// 6 bits of the vector pair. The code order is the one defined in bcnn_pkg:
// s = code[4] gives the overall sign, the low four bits (complemented when s
// is set) flip rows 1 and 2 and columns 1 and 2 relative to row 0 and column 0.
// v is normalised so that v[0] = +1 (a constant output bit); u carries the sign.
// Purely combinational. Bit 1 means +1, bit 0 means -1.
//
// Origin: a decoder from 5-bit codes to the 6 bits of a separable filter is
// part of the published design; which code stands for which filter is not
// published, and the order used here (see bcnn_pkg) is this design's choice.
module filter_decoder
  import bcnn_pkg::*;
(
  input  sf_code_t   code,
  output sf_vec_t    vec
);
  logic       s;
  logic [3:0] l;
  logic [2:0] a;

  always_comb begin
    s     = code[4];
    l     = s ? ~code[3:0] : code[3:0];
    a     = {~l[0], ~l[1], 1'b1};           // row pattern relative to row 0
    vec.v = {~l[2], ~l[3], 1'b1};           // column pattern, v[0] = +1
    vec.u = ~(a ^ {3{s}});                  // apply the sign to the rows
  end
endmodule
