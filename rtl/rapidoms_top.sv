// rapidoms_top: FPGA side of the near-storage open-modification search
// accelerator. It holds two independent kernels:
//   * the ID-Level spectrum encoder (peaks in, DHV-bit hypervector out), used
//     to encode reference libraries once and query spectra per search;
//   * the search pipeline: the precursor/charge filter and orchestrator
//     selects reference blocks of the query charge whose PMZ range is within
//     the open tolerance and streams them from the board DRAM through the
//     library m/z FIFO and the reference vector FIFO; the host streams the
//     queries through the query m/z FIFO and the query vector FIFO; the search
//     kernel scores Q_BLOCK queries at a time against each block, caching the
//     block in on-chip RAM after the first query group; the merged best
//     standard-search and open-search matches each pass a target-decoy FDR
//     filter, whose accepted identifications leave on two output streams.
// The SSD, the peer-to-peer transfer into DRAM, the DRAM itself and the host
// are outside: DRAM is reached through a word-wide read port, the host through
// the configuration, item-memory, block-table and query ports.
//
// Host protocol for a search: load the block table, set nq / tolerances /
// query charge and PMZ range, pulse start. For every run_start pulse stream
// the nq queries (PMZ on qmz, FACTOR chunks each on qhv). After the last
// block the identifications come out; search_done pulses when the
// orchestrator has issued its final flush.
module rapidoms_top
  import rapidoms_pkg::*;
#(
  parameter int unsigned N_ID      = 1024,
  parameter int unsigned N_LEVEL   = 16,
  parameter int unsigned MAX_PEAKS = 64,
  parameter int unsigned N_BLOCKS  = 64,
  parameter int unsigned FIFO_D    = 64
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // ---- encoder kernel ----
  input  logic                        id_we,
  input  logic [$clog2(N_ID)-1:0]     id_waddr,
  input  logic                        lvl_we,
  input  logic [$clog2(N_LEVEL)-1:0]  lvl_waddr,
  input  logic [DHV-1:0]              item_wdata,
  input  logic                        peak_valid,
  output logic                        peak_ready,
  input  logic [$clog2(N_ID)-1:0]     peak_bin,
  input  logic [15:0]                 peak_int,
  input  logic                        peak_last,
  output logic                        enc_valid,
  input  logic                        enc_ready,
  output logic [DHV-1:0]              enc_hv,
  // ---- search configuration ----
  input  logic                        tbl_we,
  input  logic [$clog2(N_BLOCKS)-1:0] tbl_idx,
  input  block_desc_t                 tbl_wdata,
  input  logic [$clog2(N_BLOCKS+1)-1:0] n_blocks,
  input  logic [$clog2(MAX_Q+1)-1:0]  nq,
  input  logic [CHARGE_W-1:0]         q_charge,
  input  pmz_t                        q_min_pmz,
  input  pmz_t                        q_max_pmz,
  input  logic [7:0]                  std_tol_ppm,
  input  pmz_t                        open_tol,
  input  logic                        start,
  output logic                        run_start,
  output logic                        search_done,
  // ---- board DRAM read port ----
  output logic                        rd_req_valid,
  input  logic                        rd_req_ready,
  output logic [ADDR_W-1:0]           rd_req_addr,
  input  logic                        rd_valid,
  output logic                        rd_ready,
  input  chunk_t                      rd_data,
  // ---- host query streams ----
  input  logic                        qmz_valid,
  output logic                        qmz_ready,
  input  pmz_t                        qmz,
  input  logic                        qhv_valid,
  output logic                        qhv_ready,
  input  chunk_t                      qhv,
  // ---- FDR-filtered identifications ----
  output logic                        std_valid,
  input  logic                        std_ready,
  output result_t                     std_res,
  output score_t                      std_thr,
  output logic                        std_thr_valid,
  output logic                        std_done,
  output logic                        open_valid,
  input  logic                        open_ready,
  output result_t                     open_res,
  output score_t                      open_thr,
  output logic                        open_thr_valid,
  output logic                        open_done
);
  localparam int unsigned FCW = $clog2(FIFO_D + 1);

  // ---------------- encoder kernel ----------------
  id_level_encoder #(.DHV(DHV), .N_ID(N_ID), .N_LEVEL(N_LEVEL), .MAX_PEAKS(MAX_PEAKS)) u_encoder (
    .clk, .rst_n,
    .id_we, .id_waddr, .lvl_we, .lvl_waddr, .item_wdata,
    .peak_valid, .peak_ready, .peak_bin, .peak_int, .peak_last,
    .hv_valid(enc_valid), .hv_ready(enc_ready), .hv(enc_hv));

  // ---------------- orchestrator ----------------
  logic        cmd_valid, cmd_ready, cmd_flush, cmd_first;
  logic [RCNT_W-1:0] cmd_count;
  logic        lm_in_valid, lm_in_ready, rv_in_valid, rv_in_ready;
  ref_meta_t   lm_in;
  chunk_t      rv_in;

  ref_orchestrator #(.N_BLOCKS(N_BLOCKS)) u_orch (
    .clk, .rst_n,
    .tbl_we, .tbl_idx, .tbl_wdata, .n_blocks,
    .start, .q_charge, .q_min_pmz, .q_max_pmz, .open_tol,
    .busy(), .done(search_done),
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_valid, .rd_ready, .rd_data,
    .cmd_valid, .cmd_ready, .cmd_flush, .cmd_first, .cmd_count,
    .meta_valid(lm_in_valid), .meta_ready(lm_in_ready), .meta(lm_in),
    .chunk_valid(rv_in_valid), .chunk_ready(rv_in_ready), .chunk(rv_in));

  assign run_start = cmd_valid && cmd_ready && !cmd_flush;

  // ---------------- streaming FIFOs ----------------
  logic      lm_valid, lm_ready, rv_valid, rv_ready;
  logic      qm_valid, qm_ready, qv_valid, qv_ready;
  ref_meta_t lm;
  chunk_t    rv, qv;
  pmz_t      qm;
  logic [FCW-1:0] lm_cnt, rv_cnt, qm_cnt, qv_cnt;

  sync_fifo #(.WIDTH($bits(ref_meta_t)), .DEPTH(FIFO_D)) u_library_mz_fifo (
    .clk, .rst_n, .in_valid(lm_in_valid), .in_ready(lm_in_ready), .in_data(lm_in),
    .out_valid(lm_valid), .out_ready(lm_ready), .out_data(lm), .count(lm_cnt));
  sync_fifo #(.WIDTH(CHUNK_W), .DEPTH(FIFO_D)) u_ref_stream_fifo (
    .clk, .rst_n, .in_valid(rv_in_valid), .in_ready(rv_in_ready), .in_data(rv_in),
    .out_valid(rv_valid), .out_ready(rv_ready), .out_data(rv), .count(rv_cnt));
  sync_fifo #(.WIDTH(PMZ_W), .DEPTH(FIFO_D)) u_query_mz_fifo (
    .clk, .rst_n, .in_valid(qmz_valid), .in_ready(qmz_ready), .in_data(qmz),
    .out_valid(qm_valid), .out_ready(qm_ready), .out_data(qm), .count(qm_cnt));
  sync_fifo #(.WIDTH(CHUNK_W), .DEPTH(FIFO_D)) u_query_stream_fifo (
    .clk, .rst_n, .in_valid(qhv_valid), .in_ready(qhv_ready), .in_data(qhv),
    .out_valid(qv_valid), .out_ready(qv_ready), .out_data(qv), .count(qv_cnt));

  // ---------------- search kernel ----------------
  logic    res_valid, res_ready;
  result_t res_std, res_open;
  logic    std_in_ready, open_in_ready;

  search_kernel u_kernel (
    .clk, .rst_n,
    .nq, .std_tol_ppm, .open_tol,
    .cmd_valid, .cmd_ready, .cmd_flush, .cmd_first, .cmd_count,
    .qmz_valid(qm_valid), .qmz_ready(qm_ready), .qmz(qm),
    .qhv_valid(qv_valid), .qhv_ready(qv_ready), .qhv(qv),
    .rmeta_valid(lm_valid), .rmeta_ready(lm_ready), .rmeta(lm),
    .rhv_valid(rv_valid), .rhv_ready(rv_ready), .rhv(rv),
    .res_valid, .res_ready, .res_std, .res_open,
    .busy(), .run_done());

  // both FDR filters take each result pair together
  assign res_ready = std_in_ready && open_in_ready;

  fdr_filter u_fdr_std (
    .clk, .rst_n, .n(nq),
    .in_valid(res_valid && open_in_ready), .in_ready(std_in_ready), .in_res(res_std),
    .out_valid(std_valid), .out_ready(std_ready), .out_res(std_res),
    .thr(std_thr), .thr_valid(std_thr_valid), .done(std_done));

  fdr_filter u_fdr_open (
    .clk, .rst_n, .n(nq),
    .in_valid(res_valid && std_in_ready), .in_ready(open_in_ready), .in_res(res_open),
    .out_valid(open_valid), .out_ready(open_ready), .out_res(open_res),
    .thr(open_thr), .thr_valid(open_thr_valid), .done(open_done));
endmodule
