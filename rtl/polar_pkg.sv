// polar_pkg: types, constants and small bit functions shared by the polar decoder RTL.
// The 32-LLR memory word (W) is the unit the serial unit, the internal LLR memory and the
// partial-sum (PS) memory all work in; stages 0..4 of the SC tree (32 leaves) live in the
// parallel unit.  polar_enc32 is the polar transform x = u * F^{(x)5} of one 32-bit word
// (bit j of x is the XOR of u_i over every i whose binary digits include those of j).
// The LLR word width, the header layout and the CRC polynomial are this design's choices.
package polar_pkg;
  localparam int unsigned W    = 32;    // LLRs per memory word = serial-unit PEs
  localparam int unsigned QC   = 6;     // channel LLR bits (paper: Qc = 6)
  localparam logic [23:0] CRC24_POLY = 24'hB2B117;  // 24-bit CRC (5G NR CRC24C polynomial)

  typedef enum logic [1:0] {
    DEC_FLEX = 2'd0,
    DEC_UR   = 2'd1,
    DEC_SC   = 2'd2
  } dec_sel_e;

  // first input word of a frame
  typedef struct packed {
    logic [15:0] rsvd;
    logic [5:0]  tag;
    logic        crc_en;
    logic [2:0]  llog;     // log2 of the list size
    logic [3:0]  nlog;     // log2 of the code length
    dec_sel_e    sel;
  } frame_hdr_t;

  // second input word of a frame
  typedef struct packed {
    logic [15:0] gcount;   // number of good bits
    logic [15:0] k;        // number of information bits (CRC bits included)
  } frame_len_t;

  function automatic logic [31:0] polar_enc32(input logic [31:0] u);
    logic [31:0] x;
    x = u;
    for (int s = 0; s < 5; s++)
      for (int j = 0; j < 32; j++)
        if (((j >> s) & 1) == 0) x[j] = x[j] ^ x[j | (1 << s)];
    return x;
  endfunction
endpackage
