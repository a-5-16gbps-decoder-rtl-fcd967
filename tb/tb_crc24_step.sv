// tb_crc24_step: random messages are shifted bit by bit through the CRC step and the
// result compared with a long-division CRC; the message followed by its CRC must leave a
// zero register.
module tb_crc24_step;
  import tb_polar_pkg::*;
  logic [23:0] crc_in, crc_out;
  logic bit_in;
  int checks = 0, failures = 0;
  crc24_step dut (.*);
  initial begin
    bit msg[];
    bit [23:0] c, r;
    int len;
    for (int v = 0; v < 50; v++) begin
      len = 1 + ($urandom % 200);
      msg = new[len + 24];
      for (int i = 0; i < len; i++) msg[i] = $urandom & 1;
      c = crc24(msg, len);
      for (int i = 0; i < 24; i++) msg[len + i] = c[23 - i];
      r = '0;
      for (int i = 0; i < len + 24; i++) begin
        crc_in = r;
        bit_in = msg[i];
        #1;
        r = crc_out;
        if (i == len - 1) begin
          checks++;
          if (r != c) failures++;
        end
      end
      checks++;
      if (r != 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
