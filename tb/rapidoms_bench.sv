// rapidoms_bench: end-to-end bench of rapidoms_top at its default sizes,
// shared by the small end-to-end test and the full-size workload tests, which
// differ only in the workload parameters below. The bench counts checks and
// failures and raises `finished` at the end (or when its watchdog expires);
// the instantiating testbench then prints the result line and stops.
//
// Flow: load random ID / Level item vectors and encode N_ENC spectra with the
// encoder kernel (checked bit-exactly against a software encoder); those
// spectra become the first queries. Build a library of reference blocks in
// the DRAM model: two charge-2 blocks covering the queries' PMZ range, one
// charge-3 block and one far-away charge-2 block that must both be skipped.
// References are noisy copies of queries (targets) at the same precursor
// (standard hit) or shifted by 5..60 Da (open-only hit), plus random decoys
// and random targets. The host model streams the query set on every
// run_start. The FDR-filtered standard and open identifications are compared
// with a software search and FDR filter, and every mechanism is counted.
module rapidoms_bench #(
  parameter int NQ      = 40,    // queries in the set
  parameter int NR_A    = 40,    // references in block A (charge 2)
  parameter int NR_B    = 30,    // references in block B (charge 2)
  parameter int NR_SKIP = 12,    // references in each skipped block
  parameter int N_ENC   = 4,     // spectra encoded by the encoder kernel
  parameter int STD_PPM = 20,    // standard-search window in ppm
  parameter int WATCHDOG = 2000000
) ();
  import rapidoms_pkg::*;
  localparam int N_ID = 1024, N_LEVEL = 16, NB = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  bit finished = 1'b0;  // set at the end of the test or by the watchdog; the
                         // instantiating testbench then reports and stops

  // ---------------- DUT ----------------
  logic id_we, lvl_we, peak_valid, peak_ready, peak_last, enc_valid, enc_ready;
  logic [$clog2(N_ID)-1:0] id_waddr, peak_bin;
  logic [$clog2(N_LEVEL)-1:0] lvl_waddr;
  logic [DHV-1:0] item_wdata, enc_hv;
  logic [15:0] peak_int;
  logic tbl_we, start, run_start, search_done;
  logic [$clog2(NB)-1:0] tbl_idx;
  block_desc_t tbl_wdata;
  logic [$clog2(NB+1)-1:0] n_blocks;
  logic [$clog2(MAX_Q+1)-1:0] nq;
  logic [CHARGE_W-1:0] q_charge;
  pmz_t q_min_pmz, q_max_pmz, open_tol, qmz;
  logic [7:0] std_tol_ppm;
  logic rd_req_valid, rd_req_ready, rd_valid, rd_ready;
  logic [ADDR_W-1:0] rd_req_addr;
  chunk_t rd_data, qhv;
  logic qmz_valid, qmz_ready, qhv_valid, qhv_ready;
  logic std_valid, std_ready, std_thr_valid, std_done;
  logic open_valid, open_ready, open_thr_valid, open_done;
  result_t std_res, open_res;
  score_t std_thr, open_thr;

  rapidoms_top dut (.*);
  dram_model #(.LATENCY(6), .STALL_PCT(10)) u_dram (
    .clk, .rst_n, .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_valid, .rd_ready, .rd_data);

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    finished = 1'b1;
  end

  // ---------------- host query stream driver ----------------
  pmz_t   qmz_q[$];
  chunk_t qhv_q[$];
  logic   f_qmz = 0, f_qhv = 0;
  always @(posedge clk) begin
    f_qmz <= qmz_valid && qmz_ready;
    f_qhv <= qhv_valid && qhv_ready;
  end
  always @(negedge clk) begin
    if (f_qmz) void'(qmz_q.pop_front());
    if (f_qhv) void'(qhv_q.pop_front());
    qmz_valid = qmz_q.size() != 0;
    qhv_valid = qhv_q.size() != 0 && ($urandom % 8) != 0;
    qmz = qmz_q.size() ? qmz_q[0] : '0;
    qhv = qhv_q.size() ? qhv_q[0] : '0;
  end

  // ---------------- mechanism counters ----------------
  int n_runs = 0, n_first_runs = 0, n_merge_runs = 0, n_cache_chunks = 0;
  int n_stream_chunks = 0, n_ref_stalls = 0, n_flush = 0, n_dram_bp = 0;
  logic [DHV-1:0] qv [NQ];
  pmz_t           qp [NQ];

  always @(posedge clk) if (rst_n) begin
    if (run_start) begin
      n_runs++;
      if (dut.cmd_first) n_first_runs++; else n_merge_runs++;
      for (int q = 0; q < NQ; q++) begin
        qmz_q.push_back(qp[q]);
        for (int c = 0; c < FACTOR; c++) qhv_q.push_back(qv[q][c*CHUNK_W +: CHUNK_W]);
      end
    end
    if (dut.cmd_valid && dut.cmd_ready && dut.cmd_flush) n_flush++;
    if (dut.u_kernel.s0_go) begin
      if (dut.u_kernel.from_stream) n_stream_chunks++; else n_cache_chunks++;
    end
    if (dut.u_kernel.state == dut.u_kernel.S_COMPUTE && dut.u_kernel.from_stream && !dut.u_kernel.s0_go)
      n_ref_stalls++;
    if (rd_valid && !rd_ready) n_dram_bp++;
  end

  function automatic logic [DHV-1:0] rand_hv();
    logic [DHV-1:0] v;
    for (int w = 0; w < DHV / 32; w++) v[w*32 +: 32] = $urandom;
    return v;
  endfunction

  // ---------------- reference library ----------------
  typedef struct { logic [DHV-1:0] hv; ref_meta_t m; } ref_t;
  ref_t        blocks [4][$];
  block_desc_t desc [4];
  match_t      e_std [NQ], e_open [NQ];

  function automatic void score_block(int b);
    foreach (blocks[b][i]) begin
      real qd, rd, diff;
      int sc;
      for (int q = 0; q < NQ; q++) begin
        sc = DHV - $countones(qv[q] ^ blocks[b][i].hv);
        qd = real'(qp[q]) / 65536.0; rd = real'(blocks[b][i].m.pmz) / 65536.0;
        diff = (qd > rd) ? qd - rd : rd - qd;
        if (diff / rd * 1.0e6 <= real'(STD_PPM) && (!e_std[q].found || sc > int'(e_std[q].score)))
          e_std[q] = '{1'b1, blocks[b][i].m.decoy, blocks[b][i].m.ref_id, score_t'(sc)};
        if (diff <= 75.0 && (!e_open[q].found || sc > int'(e_open[q].score)))
          e_open[q] = '{1'b1, blocks[b][i].m.decoy, blocks[b][i].m.ref_id, score_t'(sc)};
      end
    end
  endfunction

  // software FDR: lowest score s with decoys(>=s)*100 <= targets(>=s)
  function automatic void fdr_model(input match_t m [NQ], output int thr, output logic ok,
                                    ref result_t acc [$], output int n_decoy_rej, output int n_low_rej);
    int t, d;
    ok = 0; thr = 0;
    for (int s = DHV; s >= 0; s--) begin
      t = 0; d = 0;
      for (int q = 0; q < NQ; q++) if (m[q].found && int'(m[q].score) >= s) begin
        if (m[q].decoy) d++; else t++;
      end
      if (t > 0 && d * 100 <= t) begin ok = 1; thr = s; end
    end
    acc.delete(); n_decoy_rej = 0; n_low_rej = 0;
    for (int q = 0; q < NQ; q++) begin
      if (!m[q].found) continue;
      if (m[q].decoy) n_decoy_rej++;
      else if (!ok || int'(m[q].score) < thr) n_low_rej++;
      else acc.push_back('{qid: q, m: m[q]});
    end
  endfunction

  initial begin
    logic [DHV-1:0] ids [N_ID];
    logic [DHV-1:0] lvls [N_LEVEL];
    int unsigned addr;
    int ref_id;
    result_t acc_std [$], acc_open [$];
    int thr_s, thr_o, rej_d_s, rej_l_s, rej_d_o, rej_l_o, n_std_only, n_open_only, got_s, got_o;
    logic ok_s, ok_o;

    {id_we, lvl_we, peak_valid, peak_last, enc_ready, tbl_we, start} = '0;
    id_waddr = '0; lvl_waddr = '0; item_wdata = '0; peak_bin = '0; peak_int = '0;
    tbl_idx = '0; tbl_wdata = '0; n_blocks = '0; nq = '0; q_charge = '0;
    q_min_pmz = '0; q_max_pmz = '0; std_tol_ppm = 8'(STD_PPM); open_tol = OPEN_TOL_DEF;
    std_ready = 0; open_ready = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- encoder kernel: item memories, then N_ENC spectra ----
    for (int i = 0; i < N_ID; i++) begin
      ids[i] = rand_hv(); id_we = 1; id_waddr = i[$clog2(N_ID)-1:0]; item_wdata = ids[i];
      @(negedge clk);
    end
    id_we = 0;
    for (int i = 0; i < N_LEVEL; i++) begin
      lvls[i] = rand_hv(); lvl_we = 1; lvl_waddr = i[$clog2(N_LEVEL)-1:0]; item_wdata = lvls[i];
      @(negedge clk);
    end
    lvl_we = 0;
    for (int s = 0; s < NQ; s++) qv[s] = rand_hv();
    for (int s = 0; s < N_ENC && s < NQ; s++) begin
      int npk, cnt [DHV];
      logic [DHV-1:0] e;
      npk = 10 + $urandom % 40;
      for (int b = 0; b < DHV; b++) cnt[b] = 0;
      for (int p = 0; p < npk; p++) begin
        peak_valid = 1; peak_bin = $clog2(N_ID)'($urandom); peak_int = 16'($urandom);
        peak_last = (p == npk - 1);
        for (int b = 0; b < DHV; b++)
          cnt[b] += int'(ids[peak_bin][b] ^ lvls[(int'(peak_int) * N_LEVEL) >> 16][b]);
        #1;
        while (!peak_ready) begin @(negedge clk); #1; end
        @(negedge clk);
      end
      peak_valid = 0; peak_last = 0;
      for (int b = 0; b < DHV; b++) e[b] = (2 * cnt[b] > npk);
      while (!enc_valid) @(negedge clk);
      checks++;
      if (enc_hv !== e) begin failures++; $display("encoded spectrum %0d differs", s); end
      qv[s] = enc_hv;
      enc_ready = 1; @(negedge clk); enc_ready = 0;
    end
    $display("encoder: %0d spectra encoded", N_ENC);

    // ---- query set: charge 2, PMZ 520..680 ----
    for (int q = 0; q < NQ; q++) begin
      qp[q] = pmz_t'((520 + $urandom % 160) << PMZ_FRAC) + pmz_t'($urandom % 65536);
      e_std[q] = '0; e_open[q] = '0;
    end

    // ---- library: A, B (charge 2, in range), C (charge 3), D (charge 2, far) ----
    ref_id = 0;
    for (int b = 0; b < 4; b++) begin
      int nr;
      nr = (b == 0) ? NR_A : (b == 1) ? NR_B : NR_SKIP;
      blocks[b].delete();
      for (int r = 0; r < nr; r++) begin
        ref_t rf;
        int tq, kind;
        tq = $urandom % NQ;
        kind = $urandom % 4;
        rf.hv = qv[tq];
        for (int k = 0; k < 50 + $urandom % 700; k++) rf.hv[$urandom % DHV] ^= 1'b1;
        rf.m.decoy = 1'b0;
        case (kind)
          0: rf.m.pmz = qp[tq] + pmz_t'($urandom % (15 * STD_PPM));               // standard hit
          1: rf.m.pmz = qp[tq] + pmz_t'(($urandom % 55 + 5) << PMZ_FRAC);         // open-only hit
          2: begin rf.hv = rand_hv(); rf.m.decoy = 1'b1; rf.m.pmz = qp[tq] + pmz_t'($urandom % (15 * STD_PPM)); end
          default: begin rf.hv = rand_hv(); rf.m.decoy = $urandom % 2; rf.m.pmz = qp[tq] + pmz_t'(($urandom % 40) << PMZ_FRAC); end
        endcase
        if (b == 0 && rf.m.pmz >= pmz_t'(600 << PMZ_FRAC)) rf.m.pmz -= pmz_t'(100 << PMZ_FRAC);
        if (b == 1 && rf.m.pmz <  pmz_t'(600 << PMZ_FRAC)) rf.m.pmz += pmz_t'(100 << PMZ_FRAC);
        if (b == 3) rf.m.pmz += pmz_t'(1500 << PMZ_FRAC);
        rf.m.ref_id = ref_id++;
        blocks[b].push_back(rf);
      end
    end
    addr = 64;
    for (int b = 0; b < 4; b++) begin
      desc[b].charge  = (b == 2) ? 4'd3 : 4'd2;
      desc[b].base    = addr;
      desc[b].count   = RCNT_W'(blocks[b].size());
      desc[b].min_pmz = '1; desc[b].max_pmz = '0;
      foreach (blocks[b][i]) begin
        if (blocks[b][i].m.pmz < desc[b].min_pmz) desc[b].min_pmz = blocks[b][i].m.pmz;
        if (blocks[b][i].m.pmz > desc[b].max_pmz) desc[b].max_pmz = blocks[b][i].m.pmz;
        u_dram.write_word(addr, 256'(blocks[b][i].m)); addr++;
        for (int c = 0; c < FACTOR; c++) begin
          u_dram.write_word(addr, blocks[b][i].hv[c*CHUNK_W +: CHUNK_W]); addr++;
        end
      end
      addr += 16;
    end
    // table order: C, A, D, B
    for (int k = 0; k < 4; k++) begin
      int b;
      b = (k == 0) ? 2 : (k == 1) ? 0 : (k == 2) ? 3 : 1;
      tbl_we = 1; tbl_idx = k[$clog2(NB)-1:0]; tbl_wdata = desc[b];
      @(negedge clk);
    end
    tbl_we = 0; n_blocks = 4;
    score_block(0); score_block(1);   // the selected blocks, in table order
    fdr_model(e_std, thr_s, ok_s, acc_std, rej_d_s, rej_l_s);
    fdr_model(e_open, thr_o, ok_o, acc_open, rej_d_o, rej_l_o);
    n_std_only = 0; n_open_only = 0;
    for (int q = 0; q < NQ; q++) begin
      if (e_std[q].found) n_std_only++;
      if (e_open[q].found && (!e_std[q].found || e_open[q].ref_id != e_std[q].ref_id)) n_open_only++;
    end

    // ---- search ----
    nq = NQ[$clog2(MAX_Q+1)-1:0]; q_charge = 4'd2;
    q_min_pmz = '1; q_max_pmz = '0;
    for (int q = 0; q < NQ; q++) begin
      if (qp[q] < q_min_pmz) q_min_pmz = qp[q];
      if (qp[q] > q_max_pmz) q_max_pmz = qp[q];
    end
    start = 1; @(negedge clk); start = 0;

    got_s = 0; got_o = 0;
    fork
      begin : drain_std
        int done_seen;
        done_seen = 0;
        while (!done_seen) begin
          std_ready = ($urandom % 4) != 0;
          #1;
          if (std_valid && std_ready) begin
            checks++;
            if (got_s >= acc_std.size() || std_res != acc_std[got_s]) begin
              failures++; $display("std identification %0d: qid %0d ref %0d score %0d unexpected",
                                   got_s, std_res.qid, std_res.m.ref_id, std_res.m.score);
            end
            got_s++;
          end
          if (std_done) done_seen = 1;
          @(negedge clk);
        end
      end
      begin : drain_open
        int done_seen;
        done_seen = 0;
        while (!done_seen) begin
          open_ready = ($urandom % 4) != 0;
          #1;
          if (open_valid && open_ready) begin
            checks++;
            if (got_o >= acc_open.size() || open_res != acc_open[got_o]) begin
              failures++; $display("open identification %0d: qid %0d ref %0d score %0d unexpected",
                                   got_o, open_res.qid, open_res.m.ref_id, open_res.m.score);
            end
            got_o++;
          end
          if (open_done) done_seen = 1;
          @(negedge clk);
        end
      end
    join

    checks += 4;
    if (got_s != acc_std.size())  begin failures++; $display("std: %0d of %0d identifications", got_s, acc_std.size()); end
    if (got_o != acc_open.size()) begin failures++; $display("open: %0d of %0d identifications", got_o, acc_open.size()); end
    if (std_thr_valid != ok_s || (ok_s && int'(std_thr) != thr_s)) begin failures++; $display("std threshold %0d vs %0d", std_thr, thr_s); end
    if (open_thr_valid != ok_o || (ok_o && int'(open_thr) != thr_o)) begin failures++; $display("open threshold %0d vs %0d", open_thr, thr_o); end

    $display("identifications: std %0d (threshold %0d), open %0d (threshold %0d)", got_s, thr_s, got_o, thr_o);
    $display("mechanisms: runs=%0d first=%0d merged=%0d skipped_blocks=%0d flush=%0d stream_chunks=%0d cache_chunks=%0d ref_stalls=%0d dram_backpressure=%0d",
             n_runs, n_first_runs, n_merge_runs, 4 - n_runs, n_flush, n_stream_chunks, n_cache_chunks, n_ref_stalls, n_dram_bp);
    $display("mechanisms: std_found=%0d open_only=%0d decoy_rejected=%0d/%0d below_threshold=%0d/%0d encoded=%0d",
             n_std_only, n_open_only, rej_d_s, rej_d_o, rej_l_s, rej_l_o, N_ENC);
    // each mechanism must have happened
    checks += 11;
    if (n_runs != 2)              begin failures++; $display("expected 2 block runs"); end
    if (n_first_runs != 1)        begin failures++; $display("first-run not seen once"); end
    if (n_merge_runs == 0)        begin failures++; $display("no cross-block merge"); end
    if (n_flush != 1)             begin failures++; $display("flush not seen once"); end
    if (n_cache_chunks == 0)      begin failures++; $display("reference cache never read"); end
    if (n_ref_stalls == 0)        begin failures++; $display("reference stream never stalled"); end
    if (n_std_only == 0)          begin failures++; $display("no standard-search match"); end
    if (n_open_only == 0)         begin failures++; $display("no open-only match"); end
    if (rej_d_s + rej_d_o == 0)   begin failures++; $display("no decoy rejected"); end
    if (rej_l_s + rej_l_o == 0 && NQ > 40) begin failures++; $display("no match below threshold"); end
    if (n_stream_chunks != (NR_A + NR_B) * FACTOR) begin failures++; $display("stream chunks %0d", n_stream_chunks); end
    finished = 1'b1;
  end
endmodule
