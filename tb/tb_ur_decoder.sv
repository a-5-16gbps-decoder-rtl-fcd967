// tb_ur_decoder: self-checking test of scl_decoder in its flexible-decoder setting
// (list size chosen at run time, CRC-aided selection, good bits).  Frames are built with
// an independent encoder and frozen set, sent through a noisy quantised channel and
// decoded; the decoded u, the frozen mask read back and the CRC flag are compared with
// what was sent, and the cycle count is checked against an upper bound worked out from
// the decoder's schedule.  All parameters are the ultra-reliable decoder's own.
module tb_ur_decoder;
  import tb_polar_pkg::*;
  localparam int NML = 11;
  localparam int LM  = 32;
  localparam int NW  = NML - 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic ch_we, fz_we, start, cfg_crc_en, busy, done, crc_ok, release_i;
  logic [NW-1:0] ch_waddr, fz_waddr, rd_addr;
  logic [31:0][5:0] ch_wdata;
  logic [31:0] fz_frozen, fz_good, rd_u, rd_frozen;
  logic [3:0] cfg_nlog, res_nlog;
  logic [2:0] cfg_llog;

  scl_decoder #(.N_MAX_LOG(NML), .L_MAX(LM), .QI(6), .QI0(7)) dut (.*);

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run_frame(int n, int k, int g, int llog, bit crc_en, int amp, int spread,
                           bit expect_ok);
    bit frozen[], good[], u[], x[], info[];
    int nn, cyc, bad, bound, ll;
    nn = 1 << n;
    ll = 1 << llog;
    make_sets(n, k, g, frozen, good);
    make_frame(n, k, crc_en, frozen, u, info);
    polar_encode(u, x);
    for (int w = 0; w < nn / 32; w++) begin
      @(negedge clk);
      ch_we = 1; fz_we = 1; ch_waddr = NW'(w); fz_waddr = NW'(w);
      for (int j = 0; j < 32; j++) begin
        ch_wdata[j] = channel_llr(x[w*32+j], amp, spread);
        fz_frozen[j] = frozen[w*32+j];
        fz_good[j] = good[w*32+j];
      end
    end
    @(negedge clk);
    ch_we = 0; fz_we = 0;
    start = 1; cfg_nlog = 4'(n); cfg_llog = 3'(llog); cfg_crc_en = crc_en;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    bad = 0;
    for (int w = 0; w < nn / 32; w++) begin
      rd_addr = NW'(w);
      @(negedge clk);
      for (int j = 0; j < 32; j++) begin
        if (rd_u[j] !== u[w*32+j]) bad++;
        if (rd_frozen[j] !== frozen[w*32+j]) bad++;
      end
    end
    // upper bound: every bit with all lists active, full recomputation at block starts
    bound = nn / 32 + nn * (ll + 2) + nn / 32 * ll * (nn / 32) * 2 + nn / 32 * ll * n * (nn / 32)
            + nn / 32 * (n + 2) + 16;
    $display("frame n=%0d k=%0d L=%0d crc=%0d good=%0d: %0d cycles, %0d bit errors",
             n, k, ll, crc_en, g, cyc, bad);
    if (expect_ok) begin
      check(bad == 0, "decoded u differs from the sent u");
      check(!crc_en || crc_ok, "CRC flag low on a correct frame");
    end
    check(cyc < bound && cyc > (nn / 2), "cycle count outside the schedule bound");
    check(res_nlog == 4'(n), "result code length");
    @(negedge clk);
    release_i = 1;
    @(negedge clk);
    release_i = 0;
    check(!busy, "decoder not idle after release");
  endtask

  initial begin
    ch_we = 0; fz_we = 0; start = 0; release_i = 0; rd_addr = '0;
    cfg_nlog = 4'd6; cfg_llog = 3'd0; cfg_crc_en = 0;
    ch_waddr = '0; fz_waddr = '0; ch_wdata = '0; fz_frozen = '0; fz_good = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // list 32 with CRC at the ultra-reliable decoder's longest code, lower SNR
    run_frame(11, 1024, 0, 5, 1, 10, 3, 1);
    run_frame(11, 1024, 0, 3, 1, 10, 3, 1);
    run_frame(10, 512, 0, 5, 1, 8, 5, 1);
    run_frame(8, 128, 0, 5, 1, 7, 5, 1);
    run_frame(6, 40, 0, 5, 0, 8, 4, 1);
    run_frame(9, 256, 32, 5, 1, 8, 5, 1);
    run_frame(8, 128, 0, 5, 1, 0, 8, 0);
    check(!crc_ok, "CRC flag high although the channel LLRs are pure noise");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
