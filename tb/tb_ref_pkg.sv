// tb_ref_pkg: reference helpers for the testbenches, written independently of
// the RTL datapath.
//
// ref_filter() builds a 3x3 rank-1 binary filter straight from the code order
// of the design: codes 0..15 are -(a b^T) with row flips a = (+1, c[1]?-1:+1,
// c[0]?-1:+1) and column flips b = (+1, c[3]?-1:+1, c[2]?-1:+1); code 31-k is
// the negation of code k. Bit t (t = 3*row + column) of the result is 1 where
// the filter is +1.
//
// The code order it encodes is this design's choice, the same one bcnn_pkg
// describes; it is rebuilt here from that description rather than from the
// decoder's formula.
package tb_ref_pkg;

  function automatic logic [8:0] ref_filter(logic [4:0] code);
    int a [3];
    int b [3];
    int k, s;
    logic [8:0] f;
    k = (code < 16) ? int'(code) : 31 - int'(code);
    s = (code < 16) ? -1 : 1;
    a[0] = 1; a[1] = k[1] ? -1 : 1; a[2] = k[0] ? -1 : 1;
    b[0] = 1; b[1] = k[3] ? -1 : 1; b[2] = k[2] ? -1 : 1;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++)
        f[3*i+j] = (s * a[i] * b[j]) > 0;
    return f;
  endfunction

  // +1 / -1 value of tap t of filter f.
  function automatic int ref_tap(logic [8:0] f, int t);
    return f[t] ? 1 : -1;
  endfunction

endpackage
