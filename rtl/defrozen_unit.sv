// defrozen_unit: removes the frozen bits from a decoded source vector and packs the
// information bits into 32-bit words, lowest bit index first.
// Input: one 32-bit word of u per cycle with its frozen mask; in_last marks the last word
// of a frame.  Output: a word whenever 32 information bits have gathered; the last
// (possibly partial, zero-padded) word of a frame carries out_last, one cycle after the
// input ends at the latest.  The input must leave one idle cycle after in_last.
// No back-pressure.  The paper gives only the function; the packing order is this design's
// choice.
module defrozen_unit (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] in_u,
  input  logic [31:0] in_frozen,
  input  logic        in_last,
  output logic        out_valid,
  output logic [31:0] out_data,
  output logic        out_last
);
  logic [63:0] buffer, newbuf;
  logic [6:0]  fill, newfill;
  logic        flush;
  logic [31:0] packed_bits;
  logic [5:0]  cnt;

  always_comb begin
    packed_bits = '0;
    cnt = '0;
    for (int j = 0; j < 32; j++)
      if (!in_frozen[j]) begin
        packed_bits[cnt[4:0]] = in_u[j];
        cnt = cnt + 6'd1;
      end
    newbuf = buffer | (64'(packed_bits) << fill);
    newfill = fill + 7'(cnt);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buffer <= '0;
      fill <= '0;
      flush <= 1'b0;
      out_valid <= 1'b0;
      out_data <= '0;
      out_last <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      out_last <= 1'b0;
      if (flush) begin
        out_valid <= 1'b1;
        out_data <= buffer[31:0];
        out_last <= 1'b1;
        buffer <= '0;
        fill <= '0;
        flush <= 1'b0;
      end else if (in_valid) begin
        if (newfill >= 7'd32) begin
          out_valid <= 1'b1;
          out_data <= newbuf[31:0];
          buffer <= newbuf >> 32;
          fill <= newfill - 7'd32;
          out_last <= in_last && (newfill == 7'd32);
          flush <= in_last && (newfill != 7'd32);
        end else if (in_last) begin
          out_valid <= 1'b1;
          out_data <= newbuf[31:0];
          out_last <= 1'b1;
          buffer <= '0;
          fill <= '0;
        end else begin
          buffer <= newbuf;
          fill <= newfill;
        end
      end
    end
  end
endmodule
