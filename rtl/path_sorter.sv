// path_sorter: keeps the L best of the 2L candidate paths.
//
// Candidate c = 2*l + u is path l extended with bit u. Each candidate gets a
// rank: the number of candidates that beat it, where a valid candidate beats
// an invalid one, a smaller metric beats a larger one and, for equal metrics,
// the lower index wins. Ranks are therefore unique, and the candidate of rank
// r becomes list slot r, so the surviving list comes out sorted by metric
// (slot 0 is the best path). For each slot the sorter reports the parent path,
// the appended bit, the metric and whether the slot holds a valid candidate.
// Keeping the L smallest metrics is the paper's rule; the all-pairs rank
// comparison is this design's choice. Purely combinational.
module path_sorter #(
  parameter int unsigned L   = 2,
  parameter int unsigned QPM = 8
) (
  input  logic [2*L-1:0][QPM-1:0]         cand_pm,
  input  logic [2*L-1:0]                  cand_valid,
  output logic [L-1:0][$clog2(2*L)-1:0]   slot_cand,   // candidate index per slot
  output logic [L-1:0]                    slot_valid
);
  localparam int unsigned C  = 2 * L;
  localparam int unsigned CW = $clog2(C);

  logic [C-1:0][CW:0] rank;

  function automatic logic beats(logic vd, logic [QPM-1:0] pd, int unsigned d,
                                 logic vc, logic [QPM-1:0] pc, int unsigned c);
    if (vd != vc) return vd;
    if (pd != pc) return pd < pc;
    return d < c;
  endfunction

  always_comb begin
    for (int unsigned c = 0; c < C; c++) begin
      rank[c] = '0;
      for (int unsigned d = 0; d < C; d++)
        if (d != c && beats(cand_valid[d], cand_pm[d], d, cand_valid[c], cand_pm[c], c))
          rank[c] = rank[c] + 1'b1;
    end
    for (int unsigned r = 0; r < L; r++) begin
      slot_cand[r]  = '0;
      slot_valid[r] = 1'b0;
      for (int unsigned c = 0; c < C; c++)
        if (rank[c] == (CW+1)'(r)) begin
          slot_cand[r]  = CW'(c);
          slot_valid[r] = cand_valid[c];
        end
    end
  end
endmodule
