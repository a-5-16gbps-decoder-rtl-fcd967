// tb_parallel_unit: the stage-0 LLR of every position of random 32-LLR blocks, with random
// earlier decisions, compared with a recursive integer SC model (6-bit internal LLRs,
// 7-bit stage-0 LLR as in the ultra-reliable decoder).
module tb_parallel_unit;
  import tb_ref_pkg::*;
  logic [31:0][5:0] llr32;
  logic [31:0] bits;
  logic [4:0] idx;
  logic [6:0] l0;
  int checks = 0, failures = 0;
  parallel_unit #(.QI(6), .QI0(7)) dut (.*);
  initial begin
    int llr[];
    bit bb[];
    int r;
    llr = new[32];
    bb = new[32];
    for (int v = 0; v < 60; v++) begin
      for (int j = 0; j < 32; j++) begin
        llr32[j] = 6'($urandom);
        llr[j] = sm2i(int'(llr32[j]), 6);
      end
      bits = $urandom;
      for (int j = 0; j < 32; j++) bb[j] = bits[j];
      for (int p = 0; p < 32; p++) begin
        idx = 5'(p);
        #1;
        r = sc_llr(llr, bb, p, 6, 7);
        checks++;
        if (sm2i(int'(l0), 7) != r) begin
          failures++;
          if (failures < 5) $display("FAIL idx %0d got %0d exp %0d", p, sm2i(int'(l0), 7), r);
        end
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
