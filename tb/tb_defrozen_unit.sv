// tb_defrozen_unit: frames of random u words and frozen masks (including all-frozen and
// all-information words) go through the de-frozen unit; the packed output words, their
// count and the last flag are compared with a reference compaction.
module tb_defrozen_unit;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic in_valid, in_last, out_valid, out_last;
  logic [31:0] in_u, in_frozen, out_data;
  int checks = 0, failures = 0;
  bit expq [$];
  int nout, nlast;
  defrozen_unit dut (.*);

  always @(negedge clk) if (out_valid) begin
    for (int j = 0; j < 32; j++) begin
      checks++;
      if (expq.size() > 0) begin
        if (out_data[j] != expq.pop_front()) failures++;
      end else if (out_data[j] != 1'b0) failures++;
    end
    nout++;
    if (out_last) nlast++;
  end

  initial begin
    int nw, nbits, fill, expw, c;
    in_valid = 0; in_last = 0; in_u = 0; in_frozen = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 40; f++) begin
      nw = 1 + ($urandom % 8);
      nbits = 0;
      fill = 0;
      expw = 0;
      nout = 0;
      nlast = 0;
      for (int w = 0; w < nw; w++) begin
        @(negedge clk);
        in_valid = 1;
        in_u = $urandom;
        case (f % 4)
          0: in_frozen = $urandom;
          1: in_frozen = (w % 2) ? 32'h0 : 32'hFFFF_FFFF;
          2: in_frozen = $urandom & $urandom;
          default: in_frozen = $urandom | $urandom;
        endcase
        in_last = w == nw - 1;
        c = 0;
        for (int j = 0; j < 32; j++) if (!in_frozen[j]) begin
          expq.push_back(in_u[j]);
          nbits++;
          c++;
        end
        // expected words: one per 32 gathered bits, and the frame's last word always
        // leaves with the last flag, even when it carries no bits
        fill += c;
        if (fill >= 32) begin
          expw++;
          fill -= 32;
          if (in_last && fill > 0) expw++;
        end else if (in_last) expw++;
      end
      @(negedge clk);
      in_valid = 0;
      in_last = 0;
      repeat (3) @(negedge clk);
      checks += 3;
      if (nlast != 1) failures++;
      if (nout != expw) begin failures++; $display("FAIL f=%0d nout=%0d expw=%0d nlast=%0d q=%0d", f, nout, expw, nlast, expq.size()); end
      if (expq.size() != 0) begin failures++; $display("FAIL q %0d", expq.size()); end
      expq.delete();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
