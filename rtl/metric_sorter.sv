// metric_sorter: path-metric sorting and survivor assignment of the list decoder.
// Each of the L list slots offers two candidates, c = 2*slot + bit, with metric cand_pm[c]
// (QSORT bits) and a valid flag (a frozen bit offers only bit 0, a good bit only its hard
// decision).  The unit ranks all valid candidates (ties by candidate index), keeps the
// lkeep smallest, and maps them onto slots: a parent that keeps one child keeps its slot,
// the second child of a parent that keeps both goes to the lowest free slot.  The smallest
// kept metric is subtracted from all kept metrics and the result is saturated from QSORT to
// QPM bits, as the paper describes.  Combinational: one sort per cycle.  A full pairwise rank
// is this design's choice; the paper does not describe the sorter's insides.
module metric_sorter #(
  parameter int unsigned L     = 8,
  parameter int unsigned QSORT = 7,
  parameter int unsigned QPM   = 6,
  localparam int unsigned LW = (L > 1) ? $clog2(L) : 1
) (
  input  logic [2*L-1:0][QSORT-1:0] cand_pm,
  input  logic [2*L-1:0]            cand_valid,
  input  logic [LW:0]               lkeep,        // list size in use, 1..L
  output logic [L-1:0]              slot_valid,
  output logic [L-1:0][LW-1:0]      slot_parent,
  output logic [L-1:0]              slot_bit,
  output logic [L-1:0][QPM-1:0]     slot_pm
);
  localparam int PMMAX = (1 << QPM) - 1;
  logic [2*L-1:0] keep;
  logic [QSORT-1:0] minpm;

  // rank of candidate c = number of valid candidates that come before it
  for (genvar c = 0; c < 2 * int'(L); c++) begin : g_rank
    always_comb begin
      int rank;
      rank = 0;
      for (int o = 0; o < 2 * int'(L); o++)
        if (cand_valid[o] && ((cand_pm[o] < cand_pm[c]) || (cand_pm[o] == cand_pm[c] && o < c)))
          rank++;
      keep[c] = cand_valid[c] && (rank < int'(lkeep));
    end
  end

  always_comb begin
    int nd, nf, d;
    int dup_par [L];
    logic [L-1:0] dup;
    logic [L-1:0] freeslot;
    minpm = '1;
    d = 0;
    for (int c = 0; c < 2 * int'(L); c++)
      if (keep[c] && cand_pm[c] < minpm) minpm = cand_pm[c];
    slot_valid  = '0;
    slot_parent = '0;
    slot_bit    = '0;
    slot_pm     = '0;
    nd = 0;
    for (int p = 0; p < int'(L); p++) dup_par[p] = 0;
    for (int p = 0; p < int'(L); p++) begin
      dup[p] = keep[2*p] && keep[2*p+1];
      freeslot[p] = !(keep[2*p] || keep[2*p+1]);
      if (keep[2*p] || keep[2*p+1]) begin
        slot_valid[p]  = 1'b1;
        slot_parent[p] = LW'(p);
        slot_bit[p]    = !keep[2*p];
      end
      if (dup[p]) begin
        dup_par[nd] = p;
        nd++;
      end
    end
    nf = 0;
    for (int s = 0; s < int'(L); s++) begin
      if (freeslot[s]) begin
        if (nf < nd) begin
          d = dup_par[nf];
          slot_valid[s]  = 1'b1;
          slot_parent[s] = LW'(d);
          slot_bit[s]    = 1'b1;
        end
        nf++;
      end
    end
    for (int s = 0; s < int'(L); s++) begin
      int v;
      v = 0;
      v = int'(cand_pm[2*int'(slot_parent[s]) + int'(slot_bit[s])]) - int'(minpm);
      if (v > PMMAX) v = PMMAX;
      if (v < 0) v = 0;
      if (slot_valid[s]) slot_pm[s] = QPM'(v);
    end
  end
endmodule
