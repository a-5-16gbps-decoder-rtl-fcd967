// serial_unit: the wide f/g array that works on stages 5 and above of the SC tree.
// Each call takes two words of W = 32 LLRs of stage t+1 (the word holding positions j and
// the word holding positions j + 2^t) and produces one word of 32 stage-t LLRs, so a stage
// of 2^t nodes takes 2^(t-5) cycles.  Lists are processed one after another through the
// same array (serial list processing), so no LLR crossbar between lists is needed.
// Combinational; the caller registers the result into the internal LLR memory.
// The paper's serial unit is a 128/64/32-PE cascade that recomputes three stages from one
// stored stage; this unit is a single rank of 32 PEs that computes one stage per pass.
module serial_unit #(
  parameter int unsigned QIN  = 6,
  parameter int unsigned QOUT = 6
) (
  input  logic [polar_pkg::W-1:0][QIN-1:0]  word_a,   // upper inputs
  input  logic [polar_pkg::W-1:0][QIN-1:0]  word_b,   // lower inputs
  input  logic                              is_g,
  input  logic [polar_pkg::W-1:0]           ps,       // partial sums (g only)
  output logic [polar_pkg::W-1:0][QOUT-1:0] word_y
);
  for (genvar j = 0; j < int'(polar_pkg::W); j++) begin : g_pe
    polar_pe #(.QIN(QIN), .QOUT(QOUT)) u_pe (
      .a(word_a[j]), .b(word_b[j]), .is_g(is_g), .ps(ps[j]), .y(word_y[j])
    );
  end
endmodule
