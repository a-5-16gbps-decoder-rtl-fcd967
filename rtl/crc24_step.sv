// crc24_step: one step of the per-path CRC-24 register used for CRC-aided list decoding.
// Each decided information bit is shifted in MSB first; after the data bits and their 24
// appended CRC bits the register of a correct path is zero.  Combinational.  The paper
// only says a 24-bit CRC is used; the polynomial (CRC24C of 5G NR) is this design's choice.
module crc24_step (
  input  logic [23:0] crc_in,
  input  logic        bit_in,
  output logic [23:0] crc_out
);
  logic fb;
  always_comb begin
    fb = crc_in[23] ^ bit_in;
    crc_out = {crc_in[22:0], 1'b0} ^ (fb ? polar_pkg::CRC24_POLY : 24'h0);
  end
endmodule
