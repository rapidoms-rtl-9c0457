// search_kernel: the HD library-search kernel. One run compares up to MAX_Q
// query hypervectors with one reference block of up to MAX_R references of a
// single charge state. Queries are taken Q_BLOCK at a time (a query group);
// every group slides over all references of the block. Vectors travel as
// FACTOR chunks of DHV/FACTOR bits, and each cycle one reference chunk is
// compared with the same chunk of all Q_BLOCK queries in Q_BLOCK parallel
// XOR/popcount lanes, so a reference costs FACTOR cycles per group.
//
// During the first group of a run the references arrive from the library
// streams (DRAM via the orchestrator) and are written into the on-chip
// reference cache (URAM); later groups of the same run read the cache. When a
// reference's last chunk has been counted, its score DHV - Hamming distance
// goes to each lane's find_max_score, which keeps the best standard-search
// and open-search match. At the end of a group the Q_BLOCK maxima are merged
// into the per-query result buffers (written directly on the first run after
// a flush, otherwise kept only if strictly higher), so a query set can be
// searched against several blocks. A flush command streams the buffers out as
// (query number, best match) pairs for standard and open search together.
//
// Follows the accelerator: Q_BLOCK-way query parallelism, DHV/FACTOR-wide
// unrolled XOR + popcount, URAM cache filled on the first iteration, find
// max score with standard (ppm) and open (Da) windows, two result sets.
// This design's own choices: command protocol, per-query result buffers
// merged across blocks, query numbering 0..nq-1, the pipeline depth.
//
// Timing per run: per group, Q loading (>= nlanes*FACTOR cycles), nr*FACTOR
// compute cycles (stalls only on an empty reference stream), 3 drain cycles
// and 2 cycles per lane of write-back. Flush: 2 cycles per query.
module search_kernel
  import rapidoms_pkg::*;
#(
  parameter int unsigned DHV_P     = rapidoms_pkg::DHV,
  parameter int unsigned FACTOR_P  = rapidoms_pkg::FACTOR,
  parameter int unsigned Q_BLOCK_P = rapidoms_pkg::Q_BLOCK,
  parameter int unsigned MAX_R_P   = rapidoms_pkg::MAX_R,
  parameter int unsigned MAX_Q_P   = rapidoms_pkg::MAX_Q
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // run configuration
  input  logic [$clog2(MAX_Q_P+1)-1:0]   nq,
  input  logic [7:0]                     std_tol_ppm,
  input  pmz_t                           open_tol,
  // command from the orchestrator
  input  logic                           cmd_valid,
  output logic                           cmd_ready,
  input  logic                           cmd_flush,
  input  logic                           cmd_first,
  input  logic [$clog2(MAX_R_P+1)-1:0]   cmd_count,
  // query streams (host)
  input  logic                           qmz_valid,
  output logic                           qmz_ready,
  input  pmz_t                           qmz,
  input  logic                           qhv_valid,
  output logic                           qhv_ready,
  input  logic [DHV_P/FACTOR_P-1:0]      qhv,
  // library streams (DRAM)
  input  logic                           rmeta_valid,
  output logic                           rmeta_ready,
  input  ref_meta_t                      rmeta,
  input  logic                           rhv_valid,
  output logic                           rhv_ready,
  input  logic [DHV_P/FACTOR_P-1:0]      rhv,
  // merged results
  output logic                           res_valid,
  input  logic                           res_ready,
  output result_t                        res_std,
  output result_t                        res_open,
  // status
  output logic                           busy,
  output logic                           run_done
);
  localparam int unsigned CW  = DHV_P / FACTOR_P;
  localparam int unsigned FW  = (FACTOR_P > 1) ? $clog2(FACTOR_P) : 1;
  localparam int unsigned LNW = $clog2(Q_BLOCK_P + 1);
  localparam int unsigned RW  = $clog2(MAX_R_P + 1);
  localparam int unsigned QW  = $clog2(MAX_Q_P + 1);
  localparam int unsigned QAW = $clog2(MAX_Q_P);
  localparam int unsigned CAW = $clog2(MAX_R_P * FACTOR_P);
  localparam int unsigned MAW = $clog2(MAX_R_P);
  localparam int unsigned DW  = $clog2(DHV_P + 1);

  typedef enum logic [3:0] {
    S_IDLE, S_LOADQ, S_COMPUTE, S_DRAIN, S_WB_RD, S_WB_WR, S_OUT_RD, S_OUT_V
  } state_t;
  state_t state;

  // ---------------- run / group bookkeeping ----------------
  logic [RW-1:0]  nr;
  logic           first_run;     // first block since the last flush
  logic           any_run;       // result buffers hold valid data
  logic           from_stream;   // group 0: references come from DRAM
  logic [QW-1:0]  q_base;        // first query of the current group
  logic [LNW-1:0] nlanes;        // queries in the current group
  logic [QW-1:0]  remaining;

  always_comb begin
    remaining = nq - q_base;
    nlanes    = (remaining >= QW'(Q_BLOCK_P)) ? LNW'(Q_BLOCK_P) : LNW'(remaining);
  end

  // ---------------- query buffer ----------------
  logic [CW-1:0]  q_buf [Q_BLOCK_P][FACTOR_P];
  pmz_t           q_pmz [Q_BLOCK_P];
  logic [LNW-1:0] mz_loaded, hv_lane;
  logic [FW-1:0]  hv_chunk;

  assign qmz_ready = (state == S_LOADQ) && (mz_loaded < nlanes);
  assign qhv_ready = (state == S_LOADQ) && (hv_lane < nlanes);

  // ---------------- compute stage 0: reference sequencing ----------------
  logic [RW-1:0]  r;
  logic [FW-1:0]  c;
  logic           s0_go;
  logic           s0_last_ref;

  assign s0_last_ref = (r == nr - 1'b1) && (c == FW'(FACTOR_P - 1));
  always_comb begin
    s0_go = 1'b0;
    if (state == S_COMPUTE) begin
      if (from_stream) s0_go = rhv_valid && ((c != '0) || rmeta_valid);
      else             s0_go = 1'b1;
    end
  end
  assign rhv_ready   = (state == S_COMPUTE) && from_stream && s0_go;
  assign rmeta_ready = (state == S_COMPUTE) && from_stream && s0_go && (c == '0);

  // reference caches: hypervector chunks and metadata
  logic [CAW-1:0] cache_addr;
  logic [CW-1:0]  cache_rdata;
  ref_meta_t      meta_rdata;
  assign cache_addr = CAW'(r) * CAW'(FACTOR_P) + CAW'(c);

  sdp_ram #(.WIDTH(CW), .DEPTH(MAX_R_P * FACTOR_P)) u_hv_cache (
    .clk,
    .we(s0_go && from_stream), .waddr(cache_addr), .wdata(rhv),
    .re(s0_go && !from_stream), .raddr(cache_addr), .rdata(cache_rdata));

  sdp_ram #(.WIDTH($bits(ref_meta_t)), .DEPTH(MAX_R_P)) u_meta_cache (
    .clk,
    .we(s0_go && from_stream && c == '0), .waddr(MAW'(r)), .wdata(rmeta),
    .re(s0_go && !from_stream && c == '0), .raddr(MAW'(r)), .rdata(meta_rdata));

  // ---------------- compute stage 1: distance lanes ----------------
  logic           s1_valid, s1_stream;
  logic [FW-1:0]  s1_c;
  logic [CW-1:0]  s1_chunk_q;
  ref_meta_t      s1_meta_q, cur_meta, score_meta;
  logic [CW-1:0]  s1_chunk;
  ref_meta_t      s1_meta;

  assign s1_chunk = s1_stream ? s1_chunk_q : cache_rdata;
  assign s1_meta  = (s1_c != '0) ? cur_meta : (s1_stream ? s1_meta_q : meta_rdata);

  logic [Q_BLOCK_P-1:0] hd_valid;
  logic [DW-1:0]        hd [Q_BLOCK_P];
  match_t               best_std  [Q_BLOCK_P];
  match_t               best_open [Q_BLOCK_P];
  logic                 lanes_clear;

  for (genvar l = 0; l < Q_BLOCK_P; l++) begin : g_lane
    hamming_unit #(.CHUNK_W(CW), .DHV(DHV_P)) u_ham (
      .clk, .rst_n,
      .in_valid(s1_valid), .in_first(s1_c == '0), .in_last(s1_c == FW'(FACTOR_P - 1)),
      .q_chunk(q_buf[l][s1_c]), .r_chunk(s1_chunk),
      .hd_valid(hd_valid[l]), .hd(hd[l]));

    find_max_score u_fms (
      .clk, .rst_n, .clear(lanes_clear),
      .in_valid(hd_valid[l]), .q_pmz(q_pmz[l]), .ref_meta(score_meta),
      .score(score_t'(DHV_P) - score_t'(hd[l])),
      .std_tol_ppm, .open_tol,
      .best_std(best_std[l]), .best_open(best_open[l]));
  end

  // ---------------- result buffers ----------------
  logic           rb_we, rb_re;
  logic [QAW-1:0] rb_waddr, rb_raddr;
  match_t         rb_wstd, rb_wopen, rb_rstd, rb_ropen;
  logic [LNW-1:0] wb_lane;
  logic [QW-1:0]  out_idx;
  logic [1:0]     drain_cnt;

  sdp_ram #(.WIDTH($bits(match_t)), .DEPTH(MAX_Q_P)) u_res_std (
    .clk, .we(rb_we), .waddr(rb_waddr), .wdata(rb_wstd),
    .re(rb_re), .raddr(rb_raddr), .rdata(rb_rstd));
  sdp_ram #(.WIDTH($bits(match_t)), .DEPTH(MAX_Q_P)) u_res_open (
    .clk, .we(rb_we), .waddr(rb_waddr), .wdata(rb_wopen),
    .re(rb_re), .raddr(rb_raddr), .rdata(rb_ropen));

  function automatic match_t merge(input match_t old_m, input match_t new_m, input logic fresh);
    if (fresh) return new_m;
    if (new_m.found && (!old_m.found || new_m.score > old_m.score)) return new_m;
    return old_m;
  endfunction

  always_comb begin
    rb_re    = (state == S_WB_RD) || (state == S_OUT_RD);
    rb_raddr = (state == S_OUT_RD) ? QAW'(out_idx) : QAW'(q_base + QW'(wb_lane));
    rb_we    = (state == S_WB_WR);
    rb_waddr = QAW'(q_base + QW'(wb_lane));
    rb_wstd  = merge(rb_rstd,  best_std[wb_lane[$clog2(Q_BLOCK_P > 1 ? Q_BLOCK_P : 2)-1:0]],  first_run);
    rb_wopen = merge(rb_ropen, best_open[wb_lane[$clog2(Q_BLOCK_P > 1 ? Q_BLOCK_P : 2)-1:0]], first_run);
  end

  assign res_valid = (state == S_OUT_V);
  assign res_std   = '{qid: ID_W'(out_idx), m: any_run ? rb_rstd  : '0};
  assign res_open  = '{qid: ID_W'(out_idx), m: any_run ? rb_ropen : '0};
  assign cmd_ready = (state == S_IDLE);
  assign busy      = (state != S_IDLE);
  assign lanes_clear = (state == S_LOADQ);

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      nr          <= '0;
      first_run   <= 1'b1;
      any_run     <= 1'b0;
      from_stream <= 1'b0;
      q_base      <= '0;
      mz_loaded   <= '0;
      hv_lane     <= '0;
      hv_chunk    <= '0;
      r           <= '0;
      c           <= '0;
      s1_valid    <= 1'b0;
      s1_stream   <= 1'b0;
      s1_c        <= '0;
      s1_chunk_q  <= '0;
      s1_meta_q   <= '0;
      cur_meta    <= '0;
      score_meta  <= '0;
      wb_lane     <= '0;
      out_idx     <= '0;
      drain_cnt   <= '0;
      run_done    <= 1'b0;
      for (int l = 0; l < Q_BLOCK_P; l++) q_pmz[l] <= '0;
    end else begin
      run_done <= 1'b0;

      // stage 1 registers
      s1_valid  <= s0_go;
      s1_stream <= from_stream;
      if (s0_go) begin
        s1_c       <= c;
        s1_chunk_q <= rhv;
        if (c == '0) s1_meta_q <= rmeta;
      end
      if (s1_valid) begin
        if (s1_c == '0) cur_meta <= s1_meta;
        if (s1_c == FW'(FACTOR_P - 1)) score_meta <= s1_meta;
      end

      unique case (state)
        S_IDLE: if (cmd_valid) begin
          if (cmd_flush) begin
            out_idx <= '0;
            state   <= (nq == '0) ? S_IDLE : S_OUT_RD;
          end else begin
            nr          <= RW'(cmd_count);
            first_run   <= cmd_first;
            any_run     <= 1'b1;
            from_stream <= 1'b1;
            q_base      <= '0;
            mz_loaded   <= '0;
            hv_lane     <= '0;
            hv_chunk    <= '0;
            state       <= (nq == '0 || cmd_count == '0) ? S_IDLE : S_LOADQ;
          end
        end

        S_LOADQ: begin
          if (qmz_valid && qmz_ready) begin
            q_pmz[mz_loaded[$clog2(Q_BLOCK_P > 1 ? Q_BLOCK_P : 2)-1:0]] <= qmz;
            mz_loaded <= mz_loaded + 1'b1;
          end
          if (qhv_valid && qhv_ready) begin
            hv_chunk <= (hv_chunk == FW'(FACTOR_P - 1)) ? '0 : hv_chunk + 1'b1;
            if (hv_chunk == FW'(FACTOR_P - 1)) hv_lane <= hv_lane + 1'b1;
          end
          if (mz_loaded == nlanes && hv_lane == nlanes) begin
            r     <= '0;
            c     <= '0;
            state <= S_COMPUTE;
          end
        end

        S_COMPUTE: if (s0_go) begin
          c <= (c == FW'(FACTOR_P - 1)) ? '0 : c + 1'b1;
          if (c == FW'(FACTOR_P - 1)) r <= r + 1'b1;
          if (s0_last_ref) begin
            drain_cnt <= '0;
            state     <= S_DRAIN;
          end
        end

        // stage 1, the distance register and find_max_score must settle
        S_DRAIN: begin
          drain_cnt <= drain_cnt + 1'b1;
          if (drain_cnt == 2'd2) begin
            wb_lane <= '0;
            state   <= S_WB_RD;
          end
        end

        S_WB_RD: state <= S_WB_WR;

        S_WB_WR: begin
          if (wb_lane == nlanes - 1'b1) begin
            from_stream <= 1'b0;
            mz_loaded   <= '0;
            hv_lane     <= '0;
            hv_chunk    <= '0;
            if (q_base + QW'(nlanes) >= nq) begin
              first_run <= 1'b0;
              run_done  <= 1'b1;
              state     <= S_IDLE;
            end else begin
              q_base <= q_base + QW'(nlanes);
              state  <= S_LOADQ;
            end
          end else begin
            wb_lane <= wb_lane + 1'b1;
            state   <= S_WB_RD;
          end
        end

        S_OUT_RD: state <= S_OUT_V;

        S_OUT_V: if (res_ready) begin
          if (out_idx == nq - 1'b1) begin
            any_run   <= 1'b0;
            first_run <= 1'b1;
            state     <= S_IDLE;
          end else begin
            out_idx <= out_idx + 1'b1;
            state   <= S_OUT_RD;
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // query vector buffer (no reset: every lane used is loaded before use)
  always_ff @(posedge clk) begin
    if (state == S_LOADQ && qhv_valid && qhv_ready)
      q_buf[hv_lane[$clog2(Q_BLOCK_P > 1 ? Q_BLOCK_P : 2)-1:0]][hv_chunk] <= qhv;
  end

`ifndef SYNTHESIS
  a_res_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 res_valid && !res_ready |=> res_valid && $stable(res_std));
`endif
endmodule
