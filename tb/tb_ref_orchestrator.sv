// Self-checking testbench of ref_orchestrator: a table of reference blocks of
// several charges and PMZ ranges is stored in the DRAM model; for several
// query sets the commands (which blocks, first flag, count, final flush) and
// every metadata word and vector chunk delivered are compared with a model of
// the charge / open-tolerance selection. Stream back-pressure is random.
module tb_ref_orchestrator;
  import rapidoms_pkg::*;
  localparam int NB = 8;
  logic clk = 0, rst_n = 0;
  logic tbl_we;
  logic [$clog2(NB)-1:0] tbl_idx;
  block_desc_t tbl_wdata;
  logic [$clog2(NB+1)-1:0] n_blocks;
  logic start, busy, done;
  logic [CHARGE_W-1:0] q_charge;
  pmz_t q_min_pmz, q_max_pmz, open_tol;
  logic rd_req_valid, rd_req_ready, rd_valid, rd_ready;
  logic [ADDR_W-1:0] rd_req_addr;
  chunk_t rd_data;
  logic cmd_valid, cmd_ready, cmd_flush, cmd_first;
  logic [RCNT_W-1:0] cmd_count;
  logic meta_valid, meta_ready, chunk_valid, chunk_ready;
  ref_meta_t meta;
  chunk_t chunk;
  int checks = 0, failures = 0;

  ref_orchestrator #(.N_BLOCKS(NB), .MAX_OUT(8)) dut (.*);
  dram_model u_dram (.clk, .rst_n, .rd_req_valid, .rd_req_ready, .rd_req_addr,
                     .rd_valid, .rd_ready, .rd_data);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  block_desc_t blk [NB];
  ref_meta_t exp_meta [$];
  chunk_t    exp_chunk [$];
  int        exp_cmd [$];   // block index, or -1 for flush
  int        cur_blk = -1;
  logic      first_seen;

  // stream sinks with random back-pressure and compare
  always @(negedge clk) begin
    meta_ready  <= ($urandom % 4) != 0;
    chunk_ready <= ($urandom % 4) != 0;
    cmd_ready   <= ($urandom % 2) != 0;
  end
  always @(posedge clk) if (rst_n) begin
    if (meta_valid && meta_ready) begin
      checks++;
      if (exp_meta.size() == 0 || meta != exp_meta[0]) begin failures++; $display("meta mismatch"); end
      if (exp_meta.size()) void'(exp_meta.pop_front());
    end
    if (chunk_valid && chunk_ready) begin
      checks++;
      if (exp_chunk.size() == 0 || chunk != exp_chunk[0]) begin failures++; $display("chunk mismatch"); end
      if (exp_chunk.size()) void'(exp_chunk.pop_front());
    end
    if (cmd_valid && cmd_ready) begin
      checks++;
      if (exp_cmd.size() == 0) begin failures++; $display("unexpected command"); end
      else begin
        if (exp_cmd[0] < 0) begin
          if (!cmd_flush) begin failures++; $display("expected flush"); end
        end else begin
          if (cmd_flush || cmd_count != blk[exp_cmd[0]].count || cmd_first != first_seen) begin
            failures++; $display("command mismatch for block %0d", exp_cmd[0]);
          end
          first_seen = 1'b0;
        end
        void'(exp_cmd.pop_front());
      end
    end
  end

  initial begin
    int unsigned addr;
    tbl_we = 0; tbl_idx = '0; tbl_wdata = '0; n_blocks = NB; start = 0;
    q_charge = '0; q_min_pmz = '0; q_max_pmz = '0; open_tol = OPEN_TOL_DEF;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // blocks: charges 2,2,2,3,3,2,1,2 with increasing PMZ ranges
    addr = 100;
    for (int b = 0; b < NB; b++) begin
      int cnt;
      pmz_t lo;
      cnt = 1 + $urandom % 5;
      lo  = pmz_t'((400 + 100 * b) << PMZ_FRAC);
      blk[b].charge  = (b == 3 || b == 4) ? 4'd3 : (b == 6) ? 4'd1 : 4'd2;
      blk[b].min_pmz = lo;
      blk[b].max_pmz = lo + pmz_t'(90 << PMZ_FRAC);
      blk[b].base    = addr;
      blk[b].count   = RCNT_W'(cnt);
      for (int r = 0; r < cnt; r++) begin
        ref_meta_t m;
        m.pmz = lo + pmz_t'(r << PMZ_FRAC); m.ref_id = b * 100 + r; m.decoy = r[0];
        u_dram.write_word(addr, 256'(m)); addr++;
        for (int c = 0; c < FACTOR; c++) begin
          u_dram.write_word(addr, {8{$urandom}}); addr++;
        end
      end
      addr += 7;
      tbl_we = 1; tbl_idx = b[$clog2(NB)-1:0]; tbl_wdata = blk[b];
      @(negedge clk);
    end
    tbl_we = 0;
    // query sets: (charge, min, max)
    for (int qs = 0; qs < 4; qs++) begin
      int ch; real qlo, qhi;
      case (qs)
        0: begin ch = 2; qlo = 560.0; qhi = 640.0; end   // blocks 1,2 (and 0 via 75 Da? 0 max=490 no)
        1: begin ch = 3; qlo = 700.0; qhi = 705.0; end   // blocks 3,4
        2: begin ch = 4; qlo = 700.0; qhi = 705.0; end   // nothing
        default: begin ch = 2; qlo = 300.0; qhi = 1200.0; end   // all charge 2
      endcase
      q_charge = ch; q_min_pmz = pmz_t'(qlo * 65536.0); q_max_pmz = pmz_t'(qhi * 65536.0);
      first_seen = 1'b1;
      for (int b = 0; b < NB; b++) begin
        real bl, bh;
        bl = real'(blk[b].min_pmz) / 65536.0; bh = real'(blk[b].max_pmz) / 65536.0;
        if (blk[b].charge == ch && bl <= qhi + 75.0 && bh >= qlo - 75.0) begin
          exp_cmd.push_back(b);
          for (int r = 0; r < int'(blk[b].count); r++) begin
            exp_meta.push_back(ref_meta_t'(u_dram.read_word(blk[b].base + r * REC_WORDS)));
            for (int c = 0; c < FACTOR; c++)
              exp_chunk.push_back(u_dram.read_word(blk[b].base + r * REC_WORDS + 1 + c));
          end
        end
      end
      exp_cmd.push_back(-1);
      $display("query set %0d: %0d commands expected", qs, exp_cmd.size());
      start = 1; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      checks += 3;
      if (exp_cmd.size() != 0) begin failures++; $display("commands missing"); end
      if (exp_meta.size() != 0 || exp_chunk.size() != 0) begin failures++; $display("data missing"); end
      if (busy) begin failures++; $display("still busy"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
