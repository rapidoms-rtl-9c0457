// Self-checking testbench of id_level_encoder (reduced DHV): loads random ID
// and Level vectors, encodes random spectra and compares every bit with an
// independent model of XOR binding and strict bitwise majority. It also
// checks that the vector appears three cycles after the last peak.
module tb_id_level_encoder;
  localparam int DHV = 256, N_ID = 64, N_LEVEL = 8, MAX_PEAKS = 16;
  logic clk = 0, rst_n = 0;
  logic id_we, lvl_we;
  logic [$clog2(N_ID)-1:0] id_waddr;
  logic [$clog2(N_LEVEL)-1:0] lvl_waddr;
  logic [DHV-1:0] item_wdata;
  logic peak_valid, peak_ready, peak_last;
  logic [$clog2(N_ID)-1:0] peak_bin;
  logic [15:0] peak_int;
  logic hv_valid, hv_ready;
  logic [DHV-1:0] hv;
  logic [DHV-1:0] ids [N_ID];
  logic [DHV-1:0] lvls [N_LEVEL];
  int checks = 0, failures = 0;

  id_level_encoder #(.DHV(DHV), .N_ID(N_ID), .N_LEVEL(N_LEVEL), .MAX_PEAKS(MAX_PEAKS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [DHV-1:0] rand_hv();
    logic [DHV-1:0] v;
    for (int w = 0; w < DHV / 32; w++) v[w*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    id_we = 0; lvl_we = 0; id_waddr = '0; lvl_waddr = '0; item_wdata = '0;
    peak_valid = 0; peak_last = 0; peak_bin = '0; peak_int = '0; hv_ready = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
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
    for (int s = 0; s < 60; s++) begin
      int npk, cnt[DHV], lat;
      logic [DHV-1:0] expect_hv;
      npk = 1 + ($urandom % MAX_PEAKS);
      if (s == 0) npk = 1;
      if (s == 1) npk = 2;      // ties must give 0
      for (int b = 0; b < DHV; b++) cnt[b] = 0;
      for (int p = 0; p < npk; p++) begin
        peak_valid = 1; peak_bin = $clog2(N_ID)'($urandom); peak_int = 16'($urandom);
        peak_last = (p == npk - 1);
        #1;
        checks++;
        if (!peak_ready) begin failures++; $display("encoder not ready for peak"); end
        for (int b = 0; b < DHV; b++)
          cnt[b] += int'(ids[peak_bin][b] ^ lvls[(int'(peak_int) * N_LEVEL) >> 16][b]);
        @(negedge clk);
      end
      peak_valid = 0; peak_last = 0;
      for (int b = 0; b < DHV; b++) expect_hv[b] = (2 * cnt[b] > npk);
      lat = 0;
      while (!hv_valid) begin @(negedge clk); lat++; end
      checks += 2;
      if (lat != 2) begin failures++; $display("latency %0d", lat); end   // 3 edges after the last peak's edge
      if (hv !== expect_hv) begin failures++; $display("spectrum %0d: %0d bits differ", s, $countones(hv ^ expect_hv)); end
      // hold the output a few cycles: no new peak may be taken
      repeat ($urandom % 3) begin
        peak_valid = 1; #1;
        checks++;
        if (peak_ready) begin failures++; $display("peak accepted while output pending"); end
        @(negedge clk);
      end
      peak_valid = 0;
      hv_ready = 1; @(negedge clk); hv_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
