// Self-checking testbench of fdr_filter (reduced score range): random target
// and decoy matches whose scores are skewed so that a threshold exists; the
// threshold and the accepted identifications (one set holds decoys above the
// threshold, which must still be dropped) are compared with a model that
// sorts the scores and applies decoys/targets <= 1 %. Two query sets are run
// back to back to check that the histograms are cleared in between.
module tb_fdr_filter;
  import rapidoms_pkg::*;
  localparam int DHV_P = 64, MAX_Q_P = 256;
  logic clk = 0, rst_n = 0;
  logic [$clog2(MAX_Q_P+1)-1:0] n;
  logic in_valid, in_ready, out_valid, out_ready, thr_valid, done;
  result_t in_res, out_res;
  score_t thr;
  int checks = 0, failures = 0;

  fdr_filter #(.DHV_P(DHV_P), .MAX_Q_P(MAX_Q_P), .FDR_PCT(1)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    result_t set[$];
    result_t exp_q[$];
    int e_thr, t, d, nrej_decoy;
    logic e_valid;
    in_valid = 0; out_ready = 0; in_res = '0; n = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 4; run++) begin
      int nn;
      nn = (run == 2) ? 20 : (run == 3) ? 250 : 200;
      n = nn[$clog2(MAX_Q_P+1)-1:0];
      set.delete();
      for (int i = 0; i < nn; i++) begin
        result_t r;
        r.qid = i;
        r.m.found  = (run == 2) ? 1'b1 : (($urandom % 10) != 0);
        r.m.decoy  = (run == 2) ? 1'b1 : (($urandom % 4) == 0);
        r.m.ref_id = $urandom;
        // targets mostly high, decoys mostly low
        r.m.score  = r.m.decoy ? score_t'($urandom % 40) : score_t'(20 + $urandom % 45);
        // run 3: a few high-scoring decoys that the 1 % FDR still admits above the threshold
        if (run == 3) begin
          r.m.found = 1'b1;
          r.m.decoy = (i == 7) || (i % 10 == 3);
          r.m.score = (i == 7) ? score_t'(40) : r.m.decoy ? score_t'($urandom % 30) : score_t'(30 + $urandom % 35);
        end
        set.push_back(r);
      end
      // model: lowest score s with D(>=s)*100 <= T(>=s)*1, T > 0
      e_valid = 0; e_thr = 0;
      for (int s = DHV_P; s >= 0; s--) begin
        t = 0; d = 0;
        foreach (set[i]) if (set[i].m.found && int'(set[i].m.score) >= s) begin
          if (set[i].m.decoy) d++; else t++;
        end
        if (t > 0 && d * 100 <= t) begin e_valid = 1; e_thr = s; end
      end
      exp_q.delete();
      foreach (set[i]) if (e_valid && set[i].m.found && !set[i].m.decoy && int'(set[i].m.score) >= e_thr)
        exp_q.push_back(set[i]);
      while (!in_ready) @(negedge clk);
      foreach (set[i]) begin
        in_valid = 1; in_res = set[i];
        #1;
        while (!in_ready) begin @(negedge clk); #1; end
        @(negedge clk);
      end
      in_valid = 0;
      fork
        begin
          while (!done) begin
            out_ready = ($urandom % 3) != 0;
            #1;
            if (out_valid && out_ready) begin
              checks++;
              if (exp_q.size() == 0 || out_res != exp_q[0]) begin failures++; $display("unexpected output qid %0d", out_res.qid); end
              if (exp_q.size()) void'(exp_q.pop_front());
            end
            @(negedge clk);
          end
        end
      join
      out_ready = 0;
      checks += 3;
      if (exp_q.size() != 0) begin failures++; $display("run %0d: %0d accepted matches missing", run, exp_q.size()); end
      if (thr_valid != e_valid) begin failures++; $display("thr_valid %0d vs %0d", thr_valid, e_valid); end
      if (e_valid && int'(thr) != e_thr) begin failures++; $display("threshold %0d vs %0d", thr, e_thr); end
      $display("run %0d: threshold %0d valid %0d", run, e_thr, e_valid);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
