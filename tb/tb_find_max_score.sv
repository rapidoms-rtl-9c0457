// Self-checking testbench of find_max_score: random reference scores and
// precursor m/z values around a query, compared with an independent model of
// the 20 ppm standard window and the 75 Da open window, strict-greater update.
module tb_find_max_score;
  import rapidoms_pkg::*;
  logic clk = 0, rst_n = 0;
  logic clear, in_valid;
  pmz_t q_pmz;
  ref_meta_t ref_meta;
  score_t score;
  logic [7:0] std_tol_ppm;
  pmz_t open_tol;
  match_t best_std, best_open;
  int checks = 0, failures = 0;

  find_max_score dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    match_t m_std, m_open;
    real qd, rd, ppm;
    int n_std_upd = 0, n_open_only = 0;
    in_valid = 0; clear = 0; q_pmz = '0; ref_meta = '0; score = '0;
    std_tol_ppm = 8'd20; open_tol = OPEN_TOL_DEF;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int qn = 0; qn < 40; qn++) begin
      clear = 1; @(negedge clk); clear = 0;
      m_std = '0; m_open = '0;
      q_pmz = pmz_t'((300 + $urandom % 1500) << PMZ_FRAC) + pmz_t'($urandom % 65536);
      for (int i = 0; i < 100; i++) begin
        int sel;
        sel = $urandom % 5;
        case (sel)
          0: ref_meta.pmz = q_pmz + pmz_t'($urandom % 600) - pmz_t'(300);           // within a few ppm
          1: ref_meta.pmz = q_pmz + pmz_t'($urandom % (80 << PMZ_FRAC)) - pmz_t'(40 << PMZ_FRAC);
          2: ref_meta.pmz = q_pmz + pmz_t'(($urandom % 40 + 70) << PMZ_FRAC);      // around the open edge
          3: ref_meta.pmz = q_pmz - pmz_t'(($urandom % 20 + 70) << PMZ_FRAC);
          default: ref_meta.pmz = q_pmz + pmz_t'(real'(q_pmz) * real'($urandom % 60) * 1.0e-6);  // 0..60 ppm
        endcase
        ref_meta.ref_id = $urandom;
        ref_meta.decoy  = $urandom % 2;
        score = score_t'($urandom % (DHV + 1));
        if (i == 50) score = m_std.score;      // an equal score must not replace
        in_valid = 1;
        // model, in real arithmetic
        qd  = real'(q_pmz) / 65536.0;
        rd  = real'(ref_meta.pmz) / 65536.0;
        ppm = ((qd > rd) ? qd - rd : rd - qd) / rd * 1.0e6;
        if (ppm <= 20.0 && (!m_std.found || score > m_std.score)) begin
          m_std = '{1'b1, ref_meta.decoy, ref_meta.ref_id, score}; n_std_upd++;
        end
        if (((qd > rd) ? qd - rd : rd - qd) <= 75.0 && (!m_open.found || score > m_open.score)) begin
          m_open = '{1'b1, ref_meta.decoy, ref_meta.ref_id, score};
          if (ppm > 20.0) n_open_only++;
        end
        @(negedge clk);
        in_valid = 0;
        checks += 2;
        if (best_std != m_std)   begin failures++; $display("std mismatch q%0d i%0d", qn, i); end
        if (best_open != m_open) begin failures++; $display("open mismatch q%0d i%0d", qn, i); end
      end
    end
    checks++;
    if (n_std_upd == 0 || n_open_only == 0) begin failures++; $display("windows not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
