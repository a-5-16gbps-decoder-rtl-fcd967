// tb_in_scheduler: frames for every decoder kind are sent while a model of the decoders
// reports which are busy.  Checked: the target chosen (lowest idle flexible decoder, the
// ultra-reliable or the SC decoder), that the input waits while no fitting decoder is idle,
// the construction request (n, k, good count, one-hot target), every channel-memory word
// written (address and the 32 packed LLRs), the start pulse, configuration and tag.
module tb_in_scheduler;
  import polar_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic in_valid, in_ready, cons_start, cons_done, cfg_crc_en;
  logic [31:0] in_data;
  logic [6:0] dec_busy, fz_target, ch_we, dec_start;
  logic [3:0] cons_nlog, cfg_nlog;
  logic [15:0] cons_k, cons_g;
  logic [9:0] ch_waddr;
  logic [31:0][5:0] ch_wdata;
  logic [2:0] cfg_llog;
  logic [6:0][5:0] dec_tag;
  int checks = 0, failures = 0;
  in_scheduler #(.N_FLEX(5), .NW_MAX(10)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // construction model: done 5 cycles after start
  initial begin
    cons_done = 0;
    forever begin
      @(negedge clk);
      if (cons_start) begin
        repeat (4) @(negedge clk);
        cons_done = 1;
        @(negedge clk);
        cons_done = 0;
      end
    end
  end

  int cyc = 0;
  always @(posedge clk) cyc++;
  int exp_tgt, exp_n, exp_k, exp_g, nwrites, nstarts, start_tgt, ncons;
  logic [5:0] llrs [$];
  always @(negedge clk) begin
    if (|ch_we) begin
      check(ch_we == 7'(1 << exp_tgt), "channel write target");
      check(int'(ch_waddr) == nwrites, "channel write address");
      for (int j = 0; j < 32; j++) begin
        if (ch_wdata[j] != llrs[nwrites * 32 + j] && failures < 3) $display("w%0d j%0d got %h exp %h", nwrites, j, ch_wdata[j], llrs[nwrites * 32 + j]);
        check(ch_wdata[j] == llrs[nwrites * 32 + j], "packed LLR");
      end
      nwrites++;
    end
    if (|dec_start) begin
      nstarts++;
      start_tgt = $clog2(int'(dec_start));
    end
    if (cons_start) begin
      ncons++;
      check(fz_target == 7'(1 << exp_tgt), "construction target");
      check(cons_nlog == 4'(exp_n) && cons_k == 16'(exp_k) && cons_g == 16'(exp_g), "construction request");
    end
  end

  // called at a falling edge; in_ready seen there decides the next rising edge
  task automatic send(logic [31:0] d);
    in_valid = 1;
    in_data = d;
    while (!in_ready) @(negedge clk);
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic frame(dec_sel_e sel, int n, int k, int g, int llog, int tag, int tgt,
                       logic [6:0] busy, int hold);
    frame_hdr_t h;
    frame_len_t l;
    int waited, t0;
    h = '0; h.sel = sel; h.nlog = 4'(n); h.llog = 3'(llog); h.crc_en = 1; h.tag = 6'(tag);
    l.k = 16'(k); l.gcount = 16'(g);
    exp_tgt = tgt;
    exp_n = n;
    exp_k = k;
    exp_g = g;
    ncons = 0;
    nwrites = 0;
    nstarts = 0;
    llrs.delete();
    for (int i = 0; i < (1 << n); i++) llrs.push_back(6'($urandom));
    dec_busy = busy;
    send(32'(h));
    send(32'(l));
    // keep the target busy for a while: the scheduler must not take the input
    waited = 0;
    repeat (hold) begin
      @(negedge clk);
      if (ncons != 0) waited = -1000;
      waited++;
    end
    if (hold > 0) begin
      check(waited == hold, "construction started while the target was busy");
      dec_busy[tgt] = 0;
    end
    send({26'h0, llrs[0]});
    t0 = cyc;
    for (int i = 1; i < (1 << n); i++) send({26'h0, llrs[i]});
    check(cyc - t0 == (1 << n) - 1, "one LLR per cycle once loading");
    repeat (3) @(negedge clk);
    check(ncons == 1, "one construction request");
    check(nwrites == (1 << n) / 32, "number of channel words");
    check(nstarts == 1 && start_tgt == tgt, "start pulse");
    check(cfg_nlog == 4'(n) && cfg_llog == ((sel == DEC_SC) ? 3'd0 : 3'(llog)), "configuration");
    check(dec_tag[tgt] == 6'(tag), "tag");
  endtask

  initial begin
    in_valid = 0; in_data = 0; dec_busy = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    frame(DEC_FLEX, 6, 32, 4, 3, 1, 0, 7'b0000000, 0);
    frame(DEC_FLEX, 7, 64, 0, 2, 2, 2, 7'b0000011, 0);
    frame(DEC_FLEX, 6, 20, 0, 1, 3, 4, 7'b0011111, 20);
    frame(DEC_UR, 8, 100, 0, 5, 4, 5, 7'b0100000, 10);
    frame(DEC_SC, 9, 256, 0, 3, 5, 6, 7'b0011111, 0);
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
