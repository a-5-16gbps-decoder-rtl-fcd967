// tb_polar_pe: exhaustive check of the f/g processing element against integer
// arithmetic, for every pair of 6-bit sign-magnitude inputs, both functions and both
// partial-sum values.
module tb_polar_pe;
  import tb_ref_pkg::*;
  logic [5:0] a, b, y;
  logic is_g, ps;
  int checks = 0, failures = 0;
  polar_pe #(.QIN(6), .QOUT(6)) dut (.*);
  initial begin
    int ai, bi, r;
    for (int va = 0; va < 64; va++)
      for (int vb = 0; vb < 64; vb++)
        for (int m = 0; m < 4; m++) begin
          a = 6'(va); b = 6'(vb); is_g = m[0]; ps = m[1];
          #1;
          ai = sm2i(va, 6);
          bi = sm2i(vb, 6);
          r = is_g ? clampq(ref_g(ai, bi, ps), 6) : ref_f(ai, bi);
          checks++;
          if (sm2i(int'(y), 6) != r || (r == 0 && y[5])) begin
            failures++;
            if (failures < 10) $display("FAIL a=%0d b=%0d g=%0d ps=%0d y=%0d exp %0d", ai, bi, is_g, ps, sm2i(int'(y), 6), r);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
