// Surviving-path selection of the list decoder.
//
// After a split, each of L paths has two children (bit 0 and bit 1), giving
// 2L candidates with updated path metrics. This block keeps the L candidates
// with the smallest metric. Each candidate is ranked by comparing it with all
// others (ties broken by lower candidate index); a valid candidate whose
// rank is below L survives and goes to output slot "rank". Candidates of
// inactive paths are not valid and never survive; if fewer than L candidates
// are valid, the remaining slots are flagged invalid.
// Combinational; the decoder registers the result in its sort cycle.
// The paper gives the function (keep the L lowest metrics); the all-pairs
// ranking network is this design's choice.
module bd_path_sorter #(
  parameter int unsigned L    = bd_pkg::L_MAX_D,
  parameter int unsigned PM_W = bd_pkg::PM_W_D
) (
  input  logic [PM_W-1:0]        cand_pm   [2*L],
  input  logic                   cand_vld  [2*L],
  output logic [$clog2(2*L)-1:0] surv_idx  [L],   // which candidate fills slot r
  output logic                   surv_vld  [L]
);

  localparam int unsigned CW = $clog2(2*L);

  logic [CW:0] rank [2*L];

  always_comb begin
    for (int c = 0; c < 2*L; c++) begin
      rank[c] = '0;
      for (int d = 0; d < 2*L; d++) begin
        if (d != c && cand_vld[d] &&
            ((cand_pm[d] < cand_pm[c]) || (cand_pm[d] == cand_pm[c] && d < c)))
          rank[c] = rank[c] + 1'b1;
      end
    end
    for (int r = 0; r < L; r++) begin
      surv_idx[r] = '0;
      surv_vld[r] = 1'b0;
      for (int c = 0; c < 2*L; c++) begin
        if (cand_vld[c] && rank[c] == (CW+1)'(r)) begin
          surv_idx[r] = CW'(c);
          surv_vld[r] = 1'b1;
        end
      end
    end
  end

endmodule
