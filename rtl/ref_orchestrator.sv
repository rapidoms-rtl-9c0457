// ref_orchestrator: precursor/charge filter and orchestrator between the
// FPGA DRAM and the search kernel. The reference library sits in DRAM as
// blocks of at most MAX_R references, each block of one charge state with its
// references sorted by precursor m/z and described by its minimum and maximum
// PMZ. For a query set of one charge and PMZ range [q_min_pmz, q_max_pmz]
// the orchestrator scans the block table and selects every block of that
// charge whose PMZ range overlaps the query range widened by the open-search
// tolerance. For each selected block it launches a kernel run (cmd RUN, first
// set on the first one) and streams the block's records from DRAM: word 0 of
// a record (the reference metadata) goes to the library m/z stream, words
// 1..FACTOR (hypervector chunks) to the reference vector stream. After the
// last block it sends cmd FLUSH so the kernel emits the merged results.
//
// Follows the accelerator: charge-segmented, PMZ-sorted blocks with min/max
// PMZ, open-tolerance selection, block-wise retrieval feeding streams. This
// design's own choices: the table size, the record layout, the linear scan
// (one table entry per cycle), up to MAX_OUT outstanding DRAM reads, and the
// RUN/FLUSH command protocol.
//
// Timing: one DRAM request per cycle while fewer than MAX_OUT words are in
// flight; data is accepted whenever the target stream has room.
module ref_orchestrator
  import rapidoms_pkg::*;
#(
  parameter int unsigned N_BLOCKS = 64,
  parameter int unsigned MAX_OUT  = 32
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // block table load (host)
  input  logic                        tbl_we,
  input  logic [$clog2(N_BLOCKS)-1:0] tbl_idx,
  input  block_desc_t                 tbl_wdata,
  input  logic [$clog2(N_BLOCKS+1)-1:0] n_blocks,
  // query set
  input  logic                        start,
  input  logic [CHARGE_W-1:0]         q_charge,
  input  pmz_t                        q_min_pmz,
  input  pmz_t                        q_max_pmz,
  input  pmz_t                        open_tol,
  output logic                        busy,
  output logic                        done,
  // DRAM read port
  output logic                        rd_req_valid,
  input  logic                        rd_req_ready,
  output logic [ADDR_W-1:0]           rd_req_addr,
  input  logic                        rd_valid,
  output logic                        rd_ready,
  input  logic [CHUNK_W-1:0]          rd_data,
  // kernel command
  output logic                        cmd_valid,
  input  logic                        cmd_ready,
  output logic                        cmd_flush,
  output logic                        cmd_first,
  output logic [RCNT_W-1:0]           cmd_count,
  // library metadata and reference vector streams
  output logic                        meta_valid,
  input  logic                        meta_ready,
  output ref_meta_t                   meta,
  output logic                        chunk_valid,
  input  logic                        chunk_ready,
  output chunk_t                      chunk
);
  typedef enum logic [2:0] {S_IDLE, S_SCAN, S_CMD, S_FETCH, S_FLUSH} state_t;
  state_t state;

  block_desc_t tbl [N_BLOCKS];
  block_desc_t cur;
  logic [$clog2(N_BLOCKS+1)-1:0] idx;
  logic        first_pending;
  logic        hit;

  localparam int unsigned WCNT_W = $clog2(MAX_R * REC_WORDS + 1);
  localparam int unsigned OW     = $clog2(MAX_OUT + 1);
  logic [WCNT_W-1:0] req_left, dat_left;
  logic [ADDR_W-1:0] req_addr;
  logic [$clog2(REC_WORDS)-1:0] word_in_rec;
  logic [OW-1:0]     outstanding;
  logic              req_fire, dat_fire;

  always_ff @(posedge clk) begin
    if (tbl_we) tbl[tbl_idx] <= tbl_wdata;
  end

  // charge and widened-PMZ overlap test on the entry under the scan pointer
  always_comb begin
    block_desc_t d;
    logic [PMZ_W:0] lo, hi;
    d   = tbl[idx[$clog2(N_BLOCKS)-1:0]];
    lo  = {1'b0, q_min_pmz} - {1'b0, open_tol};
    if (open_tol > q_min_pmz) lo = '0;
    hi  = {1'b0, q_max_pmz} + {1'b0, open_tol};
    hit = (d.charge == q_charge) && (d.count != '0) &&
          ({1'b0, d.min_pmz} <= hi) && ({1'b0, d.max_pmz} >= lo);
  end

  assign busy         = (state != S_IDLE);
  assign cmd_valid    = (state == S_CMD) || (state == S_FLUSH);
  assign cmd_flush    = (state == S_FLUSH);
  assign cmd_first    = first_pending;
  assign cmd_count    = (state == S_CMD) ? cur.count : '0;

  assign rd_req_valid = (state == S_FETCH) && (req_left != '0) && (outstanding < OW'(MAX_OUT));
  assign rd_req_addr  = req_addr;
  assign req_fire     = rd_req_valid && rd_req_ready;

  // demultiplex record words: metadata word, then FACTOR chunks
  assign meta         = ref_meta_t'(rd_data[$bits(ref_meta_t)-1:0]);
  assign chunk        = rd_data;
  assign meta_valid   = rd_valid && (word_in_rec == '0);
  assign chunk_valid  = rd_valid && (word_in_rec != '0);
  assign rd_ready     = (word_in_rec == '0) ? meta_ready : chunk_ready;
  assign dat_fire     = rd_valid && rd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      idx           <= '0;
      cur           <= '0;
      first_pending <= 1'b0;
      done          <= 1'b0;
      req_left      <= '0;
      dat_left      <= '0;
      req_addr      <= '0;
      word_in_rec   <= '0;
      outstanding   <= '0;
    end else begin
      done <= 1'b0;
      outstanding <= outstanding + OW'(req_fire) - OW'(dat_fire);
      unique case (state)
        S_IDLE: if (start) begin
          idx           <= '0;
          first_pending <= 1'b1;
          state         <= S_SCAN;
        end
        S_SCAN: begin
          if (idx == n_blocks) state <= S_FLUSH;
          else begin
            idx <= idx + 1'b1;
            if (hit) begin
              cur   <= tbl[idx[$clog2(N_BLOCKS)-1:0]];
              state <= S_CMD;
            end
          end
        end
        S_CMD: if (cmd_ready) begin
          first_pending <= 1'b0;
          req_left      <= WCNT_W'(cur.count * REC_WORDS);
          dat_left      <= WCNT_W'(cur.count * REC_WORDS);
          req_addr      <= cur.base;
          word_in_rec   <= '0;
          state         <= S_FETCH;
        end
        S_FETCH: begin
          if (req_fire) begin
            req_left <= req_left - 1'b1;
            req_addr <= req_addr + 1'b1;
          end
          if (dat_fire) begin
            dat_left    <= dat_left - 1'b1;
            word_in_rec <= (word_in_rec == $clog2(REC_WORDS)'(REC_WORDS - 1)) ? '0 : word_in_rec + 1'b1;
            if (dat_left == WCNT_W'(1)) state <= S_SCAN;
          end
        end
        S_FLUSH: if (cmd_ready) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

`ifndef SYNTHESIS
  a_no_data_outside_fetch: assert property (@(posedge clk) disable iff (!rst_n)
                                            dat_fire |-> state == S_FETCH);
  a_cmd_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd_flush));
`endif
endmodule
