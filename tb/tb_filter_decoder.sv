// tb_filter_decoder: exhaustive check of the 5-bit filter decoder.
// For all 32 codes the outer product u v^T must equal the reference filter,
// v[0] must be +1, and the 32 filters must all be different.
//
// The expected filters come from the code order chosen in bcnn_pkg, rebuilt
// independently in tb_ref_pkg.
module tb_filter_decoder;
  import bcnn_pkg::*;
  import tb_ref_pkg::*;

  sf_code_t code;
  sf_vec_t  vec;
  int checks = 0, failures = 0;

  filter_decoder dut (.code(code), .vec(vec));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [8:0] seen [32];
    logic [8:0] got, exp;
    for (int c = 0; c < 32; c++) begin
      code = 5'(c);
      #1;
      exp = ref_filter(code);
      for (int i = 0; i < 3; i++)
        for (int j = 0; j < 3; j++)
          got[3*i+j] = ~(vec.u[i] ^ vec.v[j]);
      checks++;
      if (got !== exp) begin
        failures++;
        $display("code %0d: filter %b expected %b", c, got, exp);
      end
      checks++;
      if (vec.v[0] !== 1'b1) begin
        failures++;
        $display("code %0d: v[0] is not +1", c);
      end
      seen[c] = got;
      for (int p = 0; p < c; p++) begin
        if (seen[p] == got) begin
          failures++;
          $display("codes %0d and %0d decode to the same filter", p, c);
        end
      end
    end
    // The all -1 and all +1 filters sit at the ends of the code range.
    checks++;
    if (seen[0] !== 9'h000 || seen[31] !== 9'h1ff) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
