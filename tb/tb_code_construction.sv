// tb_code_construction: frozen and good sets produced for several (N, k, good count)
// are compared word by word with a reference that ranks every sub-channel by its
// polarization weight; the run must take 18 * N/32 cycles.
module tb_code_construction;
  import tb_polar_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic start, busy, done, fz_we;
  logic [3:0] nlog;
  logic [15:0] k, gcount;
  logic [9:0] fz_waddr;
  logic [31:0] fz_frozen, fz_good;
  logic [31:0] got_f [1024], got_g [1024];
  int checks = 0, failures = 0;
  code_construction #(.N_MAX_LOG(15)) dut (.*);

  always @(posedge clk) if (fz_we) begin
    got_f[fz_waddr] <= fz_frozen;
    got_g[fz_waddr] <= fz_good;
  end

  task automatic run(int n, int kk, int g);
    bit fr[], gd[];
    int cyc;
    make_sets(n, kk, g, fr, gd);
    nlog = 4'(n); k = 16'(kk); gcount = 16'(g);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc != 18 * ((1 << n) / 32) + 1) begin
      failures++;
      $display("FAIL cycles %0d", cyc);
    end
    for (int w = 0; w < (1 << n) / 32; w++)
      for (int j = 0; j < 32; j++) begin
        checks++;
        if (got_f[w][j] != fr[w*32+j] || got_g[w][j] != gd[w*32+j]) failures++;
      end
  endtask

  initial begin
    start = 0; nlog = 6; k = 0; gcount = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(6, 32, 8);
    run(8, 100, 20);
    run(10, 512, 128);
    run(10, 683, 0);
    run(11, 1024, 300);
    run(7, 0, 0);
    run(9, 512, 512);
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
