// tb_polar_decoder_chip_full: end-to-end test of polar_decoder_chip with every parameter at its default.
// A driver sends frames through the input link (header, length word, one LLR per beat);
// frames are built with an independent encoder, frozen set and CRC, and sent through a
// noisy quantised channel.  A monitor takes the output frames (header, packed information
// bits) and compares each, by tag, with what was sent.  It also counts the mechanisms of
// the design: frames per decoder kind, flexible decoders working at the same time, the
// input stalling while every fitting decoder is busy, CRC failures flagged, good-bit
// frames and the list sizes used; a mechanism that never happened counts as a failure.
module tb_polar_decoder_chip_full;
  import tb_polar_pkg::*;
  import polar_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_hdr, out_last;
  logic [31:0] in_data, out_data;
  logic [6:0] dec_busy;

  polar_decoder_chip dut (.*);

  int checks = 0, failures = 0;
  bit exp_info [64][];      // expected information bits by tag
  bit exp_crc_pass [64];
  bit exp_check [64];
  int exp_kind [64];
  int sent = 0, received = 0;
  int kind_count [3];
  int max_flex_busy = 0, stall_cycles = 0, crc_fail_seen = 0, good_frames = 0;
  int list_sizes_used = 0;
  int flex_used = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // cycle count: each frame's header must come out within the decoder's schedule bound
  // (every bit with all lists active, full recomputation at block starts) after its last
  // LLR went in, plus room for frames queued ahead of it at the output
  int cyc = 0;
  always @(posedge clk) cyc++;
  int t_in[64], lat_bound[64], lat_min[64];

  // called at a falling edge; in_ready seen there decides the next rising edge
  task automatic send_word(logic [31:0] d);
    in_valid = 1;
    in_data = d;
    while (!in_ready) @(negedge clk);
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic send_frame(int tag, dec_sel_e sel, int n, int k, int g, int llog, bit crc_en,
                            int amp, int spread, bit check_bits);
    bit frozen[], good[], u[], x[], info[];
    frame_hdr_t h;
    frame_len_t l;
    make_sets(n, k, g, frozen, good);
    make_frame(n, k, crc_en, frozen, u, info);
    polar_encode(u, x);
    exp_info[tag] = info;
    exp_crc_pass[tag] = crc_en && check_bits;
    exp_check[tag] = check_bits;
    exp_kind[tag] = int'(sel);
    if (g > 0) good_frames++;
    list_sizes_used |= 1 << llog;
    h = '0;
    h.sel = sel; h.nlog = 4'(n); h.llog = 3'(llog); h.crc_en = crc_en; h.tag = 6'(tag);
    l.k = 16'(k); l.gcount = 16'(g);
    send_word(32'(h));
    send_word(32'(l));
    for (int i = 0; i < (1 << n); i++) send_word({26'h0, channel_llr(x[i], amp, spread)});
    begin
      int nn, ll, nw;
      nn = 1 << n;
      nw = nn / 32;
      ll = (sel == DEC_SC) ? 1 : (1 << llog);
      t_in[tag] = cyc;
      lat_min[tag] = nn / 2;
      lat_bound[tag] = nw + nn * (ll + 2) + nw * ll * nw * 2 + nw * ll * n * nw + nw * (n + 2) + 2000;
    end
    sent++;
  endtask

  // output monitor
  initial begin
    int tag, w, bad, nbits;
    bit crc_flag;
    int dec;
    forever begin
      @(negedge clk);
      if (out_valid && out_hdr) begin
        tag = int'(out_data[5:0]);
        dec = int'(out_data[12:10]);
        crc_flag = out_data[13];
        if (dec < 5) flex_used |= 1 << dec;
        check(cyc - t_in[tag] > lat_min[tag] && cyc - t_in[tag] < lat_bound[tag], "frame latency outside the schedule bound");
        $display("frame tag %0d: %0d cycles from last LLR in to header out", tag, cyc - t_in[tag]);
        w = 0;
        bad = 0;
        nbits = exp_info[tag].size();
        forever begin
          @(negedge clk);
          if (out_valid) begin
            check(!out_hdr, "header inside a frame");
            for (int b = 0; b < 32; b++)
              if (w * 32 + b < nbits && out_data[b] !== exp_info[tag][w * 32 + b]) bad++;
            w++;
            if (out_last) break;
          end
        end
        received++;
        $display("frame tag %0d from decoder %0d: %0d words, crc %0d, %0d bit errors",
                 tag, dec, w, crc_flag, bad);
        check(w == (nbits + 31) / 32, "number of output words");
        if (exp_check[tag]) check(bad == 0, "information bits differ from those sent");
        if (exp_crc_pass[tag]) check(crc_flag, "CRC flag low on a correct frame");
        if (!exp_check[tag]) begin
          check(!crc_flag, "CRC flag high on a pure-noise frame");
          if (!crc_flag) crc_fail_seen++;
        end
        case (exp_kind[tag])
          0: check(dec < 5, "flexible frame on a wrong decoder");
          1: check(dec == 5, "ultra-reliable frame on a wrong decoder");
          default: check(dec == 6, "SC frame on a wrong decoder");
        endcase
        kind_count[exp_kind[tag]]++;
      end
    end
  end

  // mechanism counters
  always @(posedge clk) begin
    if (rst_n && $countones(dec_busy[4:0]) > max_flex_busy) max_flex_busy = $countones(dec_busy[4:0]);
    if (dut.u_in.state == 3'd2 && !dut.u_in.found) stall_cycles++;
  end

  initial begin
    in_valid = 0;
    in_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // one frame per decoder kind at its largest code length
    send_frame(0, DEC_FLEX, 14, 8192, 512, 3, 1, 9, 4, 1);
    send_frame(1, DEC_UR, 11, 1024, 0, 5, 1, 9, 4, 1);
    send_frame(2, DEC_SC, 15, 16384, 0, 0, 0, 12, 3, 1);
    while (received < sent) @(posedge clk);
    repeat (10) @(posedge clk);
    check(kind_count[0] == 1 && kind_count[1] == 1 && kind_count[2] == 1, "a decoder kind never used");
    check(good_frames > 0, "no frame with good bits");
    check(received == sent, "frames lost");
    $display("mechanisms: flex=%0d ur=%0d sc=%0d max_flex_busy=%0d stall_cycles=%0d crc_fail=%0d good_frames=%0d lists=%b",
             kind_count[0], kind_count[1], kind_count[2], max_flex_busy, stall_cycles,
             crc_fail_seen, good_frames, list_sizes_used);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired: sent %0d received %0d", sent, received);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
