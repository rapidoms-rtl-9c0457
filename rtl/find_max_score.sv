// find_max_score: per-query best-match tracker for one query lane. For each
// scored reference it tests the precursor windows and keeps two running
// maxima: the standard search (|dPMZ| * 1e6 <= std_tol_ppm * reference PMZ,
// 20 ppm by default) and the open search (|dPMZ| <= open_tol, 75 Da by
// default). A maximum and its reference index are replaced only when the new
// score is strictly higher, so the first of equal scores wins.
// clear (with or without a reference) restarts both maxima.
// Timing: updated registers are visible the cycle after in_valid.
module find_max_score
  import rapidoms_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        in_valid,
  input  pmz_t        q_pmz,
  input  ref_meta_t   ref_meta,
  input  score_t      score,
  input  logic [7:0]  std_tol_ppm,
  input  pmz_t        open_tol,
  output match_t      best_std,
  output match_t      best_open
);
  pmz_t        diff;
  logic [63:0] lhs, rhs;
  logic        in_std, in_open;

  always_comb begin
    diff    = (q_pmz > ref_meta.pmz) ? q_pmz - ref_meta.pmz : ref_meta.pmz - q_pmz;
    lhs     = 64'(diff) * 64'd1_000_000;
    rhs     = 64'(std_tol_ppm) * 64'(ref_meta.pmz);
    in_std  = (lhs <= rhs);
    in_open = (diff <= open_tol);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      best_std  <= '0;
      best_open <= '0;
    end else if (clear) begin
      best_std  <= '0;
      best_open <= '0;
    end else if (in_valid) begin
      if (in_std && (!best_std.found || score > best_std.score))
        best_std <= '{found: 1'b1, decoy: ref_meta.decoy, ref_id: ref_meta.ref_id, score: score};
      if (in_open && (!best_open.found || score > best_open.score))
        best_open <= '{found: 1'b1, decoy: ref_meta.decoy, ref_id: ref_meta.ref_id, score: score};
    end
  end
endmodule
