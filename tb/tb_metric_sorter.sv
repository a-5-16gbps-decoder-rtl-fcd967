// tb_metric_sorter: random candidate metrics and valid patterns for L = 8.  The kept
// (parent, bit) pairs must be exactly the lkeep smallest valid candidates (ties to the
// lower index), each once; a parent with a kept child keeps its own slot; the metrics must
// be reduced by the smallest kept metric and saturated to 6 bits.
module tb_metric_sorter;
  localparam int L = 8;
  logic [2*L-1:0][6:0] cand_pm;
  logic [2*L-1:0] cand_valid;
  logic [3:0] lkeep;
  logic [L-1:0] slot_valid, slot_bit;
  logic [L-1:0][2:0] slot_parent;
  logic [L-1:0][5:0] slot_pm;
  int checks = 0, failures = 0;
  metric_sorter #(.L(L), .QSORT(7), .QPM(6)) dut (.*);

  task automatic check(bit ok);
    checks++;
    if (!ok) failures++;
  endtask

  initial begin
    bit exp_keep [2*L];
    int seen [2*L];
    int nkeep, best, minpm, c, cnt;
    for (int v = 0; v < 3000; v++) begin
      lkeep = 4'(1 << ($urandom % 4));
      for (int c2 = 0; c2 < 2 * L; c2++) begin
        cand_pm[c2] = 7'($urandom % ((v % 3 == 0) ? 8 : 128));
        cand_valid[c2] = (c2 / 2 < int'(lkeep)) && ($urandom % 5 != 0);
        exp_keep[c2] = 0;
        seen[c2] = 0;
      end
      // reference: repeatedly pick the smallest remaining valid candidate
      nkeep = 0;
      minpm = 1000;
      for (int r = 0; r < int'(lkeep); r++) begin
        best = -1;
        for (int c2 = 0; c2 < 2 * L; c2++)
          if (cand_valid[c2] && !exp_keep[c2] && (best < 0 || cand_pm[c2] < cand_pm[best])) best = c2;
        if (best >= 0) begin
          exp_keep[best] = 1;
          nkeep++;
          if (int'(cand_pm[best]) < minpm) minpm = int'(cand_pm[best]);
        end
      end
      #1;
      cnt = 0;
      for (int s = 0; s < L; s++) if (slot_valid[s]) begin
        c = 2 * int'(slot_parent[s]) + int'(slot_bit[s]);
        seen[c]++;
        cnt++;
        check(int'(slot_pm[s]) == ((int'(cand_pm[c]) - minpm > 63) ? 63 : int'(cand_pm[c]) - minpm));
        check(s < int'(lkeep));
      end
      check(cnt == nkeep);
      for (int c2 = 0; c2 < 2 * L; c2++) check(seen[c2] == int'(exp_keep[c2]));
      for (int p = 0; p < L; p++)
        if (exp_keep[2*p] || exp_keep[2*p+1]) check(slot_valid[p] && slot_parent[p] == 3'(p));
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
