// tb_bit_recovery: for random source vectors u (N = 2^6 .. 2^10) the partial-sum rows a
// decoder holds after its last bit are built in the testbench (row t = polar encoding of
// u[N-2^(t+1) .. N-2^t-1]) and served on the ps_* port; the rebuilt u must equal the
// original and the run must take the scheduled number of cycles.
module tb_bit_recovery;
  import tb_polar_pkg::*;
  localparam int NML = 10;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic start, busy, done;
  logic [3:0] nlog, ps_stage;
  logic [31:0] last_bits, ps_rdata, rd_data;
  logic [NML-6:0] ps_word, rd_addr;
  int checks = 0, failures = 0;
  logic [1023:0] rows [16];
  bit_recovery #(.N_MAX_LOG(NML)) dut (.*);

  always_comb begin
    ps_rdata = '0;
    for (int j = 0; j < 32; j++) ps_rdata[j] = rows[ps_stage][int'(ps_word) * 32 + j];
  end

  initial begin
    bit u[], seg[], enc[];
    int nn, cyc, expc;
    start = 0; nlog = 6; last_bits = 0; rd_addr = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < 10; v++) begin
      int n;
      n = 6 + (v % 5);
      nn = 1 << n;
      u = new[nn];
      for (int i = 0; i < nn; i++) u[i] = $urandom & 1;
      for (int t = 5; t < n; t++) begin
        seg = new[1 << t];
        for (int i = 0; i < (1 << t); i++) seg[i] = u[nn - (1 << (t + 1)) + i];
        polar_encode(seg, enc);
        for (int i = 0; i < (1 << t); i++) rows[t][i] = enc[i];
      end
      for (int j = 0; j < 32; j++) last_bits[j] = u[nn - 32 + j];
      nlog = 4'(n);
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin
        @(negedge clk);
        cyc++;
      end
      expc = (nn / 32 - 1) + 1;
      for (int t = 6; t < n; t++) expc += (t - 5) * (1 << (t - 5));
      checks++;
      if (cyc != expc + 1) begin
        failures++;
        $display("FAIL cycles %0d expected %0d", cyc, expc + 1);
      end
      for (int w = 0; w < nn / 32; w++) begin
        rd_addr = (NML-5)'(w);
        @(negedge clk);
        for (int j = 0; j < 32; j++) begin
          checks++;
          if (rd_data[j] != u[w * 32 + j]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
