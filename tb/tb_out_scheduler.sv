// tb_out_scheduler: a model of seven finished decoders (each with its own u and frozen
// words) raises done flags; checked are the header fields, the round-robin order, every
// word streamed to the de-frozen unit with its last flag, the release pulse and the gap
// between frames.
module tb_out_scheduler;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic [6:0] dec_done, dec_crc_ok, dec_release;
  logic [6:0][3:0] dec_nlog;
  logic [6:0][5:0] dec_tag;
  logic [9:0] rd_addr;
  logic [6:0][31:0] dec_rd_u, dec_rd_frozen;
  logic df_valid, df_last, hdr_valid;
  logic [31:0] df_u, df_frozen, hdr_data;
  logic [31:0] umem [7][32];
  int checks = 0, failures = 0;
  out_scheduler #(.N_DEC(7), .NW_MAX(10)) dut (.*);

  always_comb
    for (int d = 0; d < 7; d++) begin
      dec_rd_u[d] = umem[d][rd_addr[4:0]];
      dec_rd_frozen[d] = ~umem[d][rd_addr[4:0]] ^ 32'(d);
    end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  int order [$];
  initial begin
    int d, w, gap;
    @(negedge clk);
    forever begin
      while (!hdr_valid) @(negedge clk);
      d = int'(hdr_data[12:10]);
      order.push_back(d);
      check(hdr_data[5:0] == dec_tag[d] && hdr_data[9:6] == dec_nlog[d] &&
            hdr_data[13] == dec_crc_ok[d], "header fields");
      w = 0;
      forever begin
        @(negedge clk);
        check(!hdr_valid, "header inside a frame");
        if (df_valid) begin
          check(df_u == umem[d][w] && df_frozen == (~umem[d][w] ^ 32'(d)), "streamed word");
          check(df_last == (w == (1 << (dec_nlog[d] - 5)) - 1), "last flag");
          w++;
        end else begin
          check(dec_release == 7'(1 << d), "release pulse");
          dec_done[d] = 0;
          break;
        end
      end
      check(w == (1 << (dec_nlog[d] - 5)), "frame length");
      // release, two gap cycles, one pick cycle, then the next header
      gap = 0;
      do begin
        @(negedge clk);
        gap++;
      end while (!hdr_valid && gap < 50);
      if (hdr_valid) check(gap == 4, "gap between frames");
    end
  end

  initial begin
    dec_done = 0;
    for (int d = 0; d < 7; d++) begin
      dec_nlog[d] = 4'(6 + (d % 4));
      dec_tag[d] = 6'(10 + d);
      dec_crc_ok[d] = d[0];
      for (int w = 0; w < 32; w++) umem[d][w] = $urandom;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    dec_done = 7'b1010010;
    repeat (200) @(negedge clk);
    dec_done = 7'b0101101;
    repeat (300) @(negedge clk);
    // the last served was 5, so 6 comes before 0
    dec_done = 7'b1000001;
    repeat (150) @(negedge clk);
    check(order.size() == 9, "all frames taken");
    if (order.size() == 9) begin
      check(order[7] == 6 && order[8] == 0, "round-robin order, wrapping around");
      check(order[0] == 1 && order[1] == 4 && order[2] == 6, "round-robin order, first round");
      check(order[3] == 0 && order[4] == 2 && order[5] == 3 && order[6] == 5, "round-robin order, second round");
    end
    check(dec_done == 0, "every decoder released");
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
