// polar_pe: one processing element of the SC decoder.  It computes either the f function
//   y = sign(a*b) * min(|a|,|b|)
// or the g function
//   y = b + (-1)^ps * a
// on LLRs held in sign-and-magnitude form (top bit = sign, 1 = negative), as the paper uses.
// Purely combinational.  a is the LLR of the upper branch (x_j), b that of the lower branch
// (x_{j+half}); ps is the partial sum of the upper branch.  The result is saturated to the
// output width and a zero result always carries a positive sign.  Saturation and the signed
// zero convention are this design's choices.
module polar_pe #(
  parameter int unsigned QIN  = 6,
  parameter int unsigned QOUT = 6
) (
  input  logic [QIN-1:0]  a,
  input  logic [QIN-1:0]  b,
  input  logic            is_g,
  input  logic            ps,
  output logic [QOUT-1:0] y
);
  localparam int MAXO = (1 << (QOUT - 1)) - 1;
  logic signed [QIN+1:0] sa, sb, sum;
  logic [QIN-2:0] ma, mb, mmin;
  int mag;
  logic sgn;

  always_comb begin
    ma = a[QIN-2:0];
    mb = b[QIN-2:0];
    sa = a[QIN-1] ? -$signed({3'b000, ma}) : $signed({3'b000, ma});
    sb = b[QIN-1] ? -$signed({3'b000, mb}) : $signed({3'b000, mb});
    mmin = (ma < mb) ? ma : mb;
    sum = (ps ? -sa : sa) + sb;
    if (is_g) begin
      sgn = sum < 0;
      mag = sgn ? -int'(sum) : int'(sum);
    end else begin
      sgn = a[QIN-1] ^ b[QIN-1];
      mag = int'(mmin);
    end
    if (mag > MAXO) mag = MAXO;
    if (mag == 0) sgn = 1'b0;
    y = {sgn, (QOUT-1)'(mag)};
  end
endmodule
