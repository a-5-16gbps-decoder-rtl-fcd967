// tb_serial_unit: random words through the 32-lane serial unit; every lane is compared
// with integer f/g results (7-bit inputs and outputs, as in the SC decoder).
module tb_serial_unit;
  import tb_ref_pkg::*;
  logic [31:0][6:0] word_a, word_b, word_y;
  logic is_g;
  logic [31:0] ps;
  int checks = 0, failures = 0;
  serial_unit #(.QIN(7), .QOUT(7)) dut (.*);
  initial begin
    int r;
    for (int v = 0; v < 400; v++) begin
      for (int j = 0; j < 32; j++) begin
        word_a[j] = 7'($urandom);
        word_b[j] = 7'($urandom);
      end
      is_g = v[0];
      ps = $urandom;
      #1;
      for (int j = 0; j < 32; j++) begin
        r = is_g ? clampq(ref_g(sm2i(int'(word_a[j]), 7), sm2i(int'(word_b[j]), 7), ps[j]), 7)
                 : ref_f(sm2i(int'(word_a[j]), 7), sm2i(int'(word_b[j]), 7));
        checks++;
        if (sm2i(int'(word_y[j]), 7) != r) failures++;
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
