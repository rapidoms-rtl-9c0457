// search_kernel_bench: self-checking bench of search_kernel at reduced sizes
// (DHV 256 in 4 chunks, blocks of up to 32 references) with QB queries in
// parallel and up to 4*QB queries per set. A query set of 2.5*QB queries (two
// full groups and one partial) is searched against two reference blocks and
// flushed; then a full set of 4*QB queries is searched against one block.
// At the end (or on watchdog expiry) it raises `finished`, and the
// instantiating testbench prints the result line and stops. Queries are
// noisy copies of references with precursors inside the 20 ppm window, the 75 Da window or neither. The
// flushed standard and open results are compared with a software search, and
// with the streams never stalling the run time is checked against
// groups x (nlanes*F + 1 + nr*F + 3 + 2*nlanes) cycles.
module search_kernel_bench #(parameter int QB = 4) ();
  import rapidoms_pkg::*;
  localparam int DHV_P = 256, F = 4, MR = 32, MQ = 4 * QB, CW = DHV_P / F;
  logic clk = 0, rst_n = 0;
  logic [$clog2(MQ+1)-1:0] nq;
  logic [7:0] std_tol_ppm;
  pmz_t open_tol;
  logic cmd_valid, cmd_ready, cmd_flush, cmd_first;
  logic [$clog2(MR+1)-1:0] cmd_count;
  logic qmz_valid, qmz_ready, qhv_valid, qhv_ready;
  pmz_t qmz;
  logic [CW-1:0] qhv, rhv;
  logic rmeta_valid, rmeta_ready, rhv_valid, rhv_ready;
  ref_meta_t rmeta;
  logic res_valid, res_ready, busy, run_done;
  result_t res_std, res_open;
  int checks = 0, failures = 0;
  bit finished = 1'b0;  // set at the end of the test or by the watchdog; the
                         // instantiating testbench then reports and stops

  search_kernel #(.DHV_P(DHV_P), .FACTOR_P(F), .Q_BLOCK_P(QB), .MAX_R_P(MR), .MAX_Q_P(MQ)) dut (.*);
  always #5 clk = ~clk;
  initial begin f_qmz = 0; f_qhv = 0; f_rmeta = 0; f_rhv = 0; end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    finished = 1'b1;
  end

  // stream sources
  pmz_t          qmz_q[$];
  logic [CW-1:0] qhv_q[$], rhv_q[$];
  ref_meta_t     rmeta_q[$];
  int            stall_pct = 0;
  logic f_qmz, f_qhv, f_rmeta, f_rhv;
  always @(posedge clk) begin
    f_qmz   <= qmz_valid && qmz_ready;
    f_qhv   <= qhv_valid && qhv_ready;
    f_rmeta <= rmeta_valid && rmeta_ready;
    f_rhv   <= rhv_valid && rhv_ready;
  end
  always @(negedge clk) begin
    if (f_qmz)   void'(qmz_q.pop_front());
    if (f_qhv)   void'(qhv_q.pop_front());
    if (f_rmeta) void'(rmeta_q.pop_front());
    if (f_rhv)   void'(rhv_q.pop_front());
    qmz_valid   = qmz_q.size() != 0 && ($urandom % 100) >= stall_pct;
    qhv_valid   = qhv_q.size() != 0 && ($urandom % 100) >= stall_pct;
    rmeta_valid = rmeta_q.size() != 0 && ($urandom % 100) >= stall_pct;
    rhv_valid   = rhv_q.size() != 0 && ($urandom % 100) >= stall_pct;
    qmz   = qmz_q.size()   ? qmz_q[0]   : '0;
    qhv   = qhv_q.size()   ? qhv_q[0]   : '0;
    rmeta = rmeta_q.size() ? rmeta_q[0] : '0;
    rhv   = rhv_q.size()   ? rhv_q[0]   : '0;
  end

  logic [DHV_P-1:0] qv [MQ];
  pmz_t             qp [MQ];
  match_t           e_std [MQ], e_open [MQ];

  function automatic logic [DHV_P-1:0] rand_hv();
    logic [DHV_P-1:0] v;
    for (int w = 0; w < DHV_P / 32; w++) v[w*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic send_queries(input int n);
    for (int q = 0; q < n; q++) begin
      qmz_q.push_back(qp[q]);
      for (int c = 0; c < F; c++) qhv_q.push_back(qv[q][c*CW +: CW]);
    end
  endtask

  // one block: build references, stream them, update the model
  task automatic run_block(input int n, input int nr, input logic first, input int id0, output int cycles);
    logic [DHV_P-1:0] rv;
    ref_meta_t m;
    real qd, rd, diff;
    int sc, t0;
    for (int r = 0; r < nr; r++) begin
      int tq;
      tq = $urandom % n;
      rv = qv[tq];
      for (int k = 0; k < 8 + $urandom % 40; k++) rv[$urandom % DHV_P] ^= 1'b1;
      if (($urandom % 3) == 0) rv = rand_hv();
      case ($urandom % 3)
        0: m.pmz = qp[tq] + pmz_t'($urandom % 200);                         // ~ppm
        1: m.pmz = qp[tq] + pmz_t'(($urandom % 60 + 5) << PMZ_FRAC);         // open window
        default: m.pmz = qp[tq] + pmz_t'(($urandom % 40 + 80) << PMZ_FRAC);  // outside
      endcase
      m.ref_id = id0 + r; m.decoy = $urandom % 2;
      rmeta_q.push_back(m);
      for (int c = 0; c < F; c++) rhv_q.push_back(rv[c*CW +: CW]);
      for (int q = 0; q < n; q++) begin
        sc = DHV_P - $countones(qv[q] ^ rv);
        qd = real'(qp[q]) / 65536.0; rd = real'(m.pmz) / 65536.0;
        diff = (qd > rd) ? qd - rd : rd - qd;
        if (diff / rd * 1.0e6 <= 20.0 && (!e_std[q].found || sc > int'(e_std[q].score)))
          e_std[q] = '{1'b1, m.decoy, m.ref_id, score_t'(sc)};
        if (diff <= 75.0 && (!e_open[q].found || sc > int'(e_open[q].score)))
          e_open[q] = '{1'b1, m.decoy, m.ref_id, score_t'(sc)};
      end
    end
    send_queries(n);
    cmd_valid = 1; cmd_flush = 0; cmd_first = first; cmd_count = nr[$clog2(MR+1)-1:0];
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    t0 = $time;
    @(negedge clk);
    cmd_valid = 0;
    while (!run_done) @(negedge clk);
    cycles = ($time - t0) / 10;
  endtask

  task automatic flush_and_check(input int n);
    int got;
    cmd_valid = 1; cmd_flush = 1;
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    cmd_valid = 0;
    got = 0;
    while (got < n) begin
      res_ready = ($urandom % 2) == 1;
      #1;
      if (res_valid && res_ready) begin
        checks += 2;
        if (res_std.qid != got || res_std.m != e_std[got]) begin
          failures++; $display("std q%0d: got id %0d score %0d found %0d, exp id %0d score %0d found %0d",
                               got, res_std.m.ref_id, res_std.m.score, res_std.m.found,
                               e_std[got].ref_id, e_std[got].score, e_std[got].found);
        end
        if (res_open.qid != got || res_open.m != e_open[got]) begin
          failures++; $display("open q%0d: got id %0d score %0d, exp id %0d score %0d",
                               got, res_open.m.ref_id, res_open.m.score, e_open[got].ref_id, e_open[got].score);
        end
        got++;
      end
      @(negedge clk);
    end
    res_ready = 0;
  endtask

  initial begin
    int cyc, exp_cyc, n, nr;
    cmd_valid = 0; cmd_flush = 0; cmd_first = 0; cmd_count = '0; res_ready = 0;
    std_tol_ppm = 8'd20; open_tol = OPEN_TOL_DEF;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int set = 0; set < 2; set++) begin
      n = (set == 0) ? 2 * QB + QB / 2 : MQ;
      nq = n[$clog2(MQ+1)-1:0];
      for (int q = 0; q < n; q++) begin
        qv[q] = rand_hv();
        qp[q] = pmz_t'((400 + $urandom % 800) << PMZ_FRAC) + pmz_t'($urandom % 65536);
        e_std[q] = '0; e_open[q] = '0;
      end
      for (int b = 0; b < ((set == 0) ? 2 : 1); b++) begin
        nr = (b == 0) ? MR : 13;
        stall_pct = (set == 0 && b == 0) ? 0 : 30;
        run_block(n, nr, b == 0, 1000 * (set + 1) + 100 * b, cyc);
        if (stall_pct == 0) begin
          exp_cyc = 0;
          for (int g = 0; g < (n + QB - 1) / QB; g++) begin
            int nl;
            nl = (n - g * QB >= QB) ? QB : n - g * QB;
            exp_cyc += nl * F + 1 + nr * F + 3 + 2 * nl;
          end
          checks++;
          if (cyc != exp_cyc) begin failures++; $display("run took %0d cycles, expected %0d", cyc, exp_cyc); end
          else $display("run of %0d queries x %0d refs: %0d cycles", n, nr, cyc);
        end
      end
      flush_and_check(n);
    end
    finished = 1'b1;
  end
endmodule
