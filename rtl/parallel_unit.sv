// parallel_unit: finishes one bit of the SC tree inside a 32-bit block.
// Input: the 32 LLRs of stage 5 of one list path (the paper's "LLR32 DFFs"), the bits that
// path has already decided in the current 32-bit block, and the position idx (0..31) of the
// next bit.  Stages 4, 3, 2, 1 and 0 (16 + 8 + 4 + 2 + 1 PEs) are evaluated combinationally:
// at stage t the PE applies f when bit t of idx is 0 and g when it is 1, with the partial
// sum of the left sibling obtained by polar-encoding its already decided bits.  Output: the
// stage-0 LLR of bit idx, with QI0 bits (the ultra-reliable decoder keeps 7 bits at stage 0).
// Combinational.  The paper's unit also decides four bits at once by maximum likelihood and
// decodes rate-0/rate-1 nodes in one step; this unit decides one bit per call.
module parallel_unit #(
  parameter int unsigned QI  = 6,
  parameter int unsigned QI0 = 6
) (
  input  logic [31:0][QI-1:0] llr32,
  input  logic [31:0]         bits,
  input  logic [4:0]          idx,
  output logic [QI0-1:0]      l0
);
  logic [5:1][31:0][QI-1:0] r;     // r[t] = stage-t LLRs (2^t used), r[5] = input
  logic [4:0][15:0]         ps;    // ps[t][j]: partial sum for the g of stage t

  assign r[5] = llr32;

  always_comb begin
    int base;
    ps = '0;
    for (int t = 0; t < 5; t++) begin
      base = (int'(idx) >> (t + 1)) << (t + 1);
      for (int j = 0; j < (1 << t); j++)
        for (int i = 0; i < (1 << t); i++)
          if ((i & j) == j) ps[t][j] = ps[t][j] ^ bits[base + i];
    end
  end

  for (genvar t = 1; t < 5; t++) begin : g_stage
    for (genvar j = 0; j < 32; j++) begin : g_node
      if (j < (1 << t)) begin : g_pe
        polar_pe #(.QIN(QI), .QOUT(QI)) u_pe (
          .a(r[t+1][j]), .b(r[t+1][j + (1 << t)]), .is_g(idx[t]), .ps(ps[t][j]), .y(r[t][j])
        );
      end else begin : g_unused
        assign r[t][j] = '0;
      end
    end
  end

  polar_pe #(.QIN(QI), .QOUT(QI0)) u_pe0 (
    .a(r[1][0]), .b(r[1][1]), .is_g(idx[0]), .ps(ps[0][0]), .y(l0)
  );
endmodule
