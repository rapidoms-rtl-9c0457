// id_level_encoder: ID-Level hyperdimensional encoder of one preprocessed
// spectrum. Each peak carries an m/z bin index and a normalised intensity.
// The bin selects an ID hypervector, the intensity is quantised to one of
// N_LEVEL levels that selects a Level hypervector, and the two are bound by
// XOR. The bound vectors of all peaks are bundled by per-bit counters and the
// spectrum hypervector is the bitwise majority of the counters. All DHV bits
// are processed in parallel (fully unrolled), one peak per cycle.
//
// Follows the accelerator: ID memory x Level memory, XOR binding, bitwise
// majority, DHV-wide unrolling. This design's own choices: quantisation
// level = (intensity * N_LEVEL) >> 16 for a 16-bit intensity scaled so the
// base peak is 0xFFFF; a bit is 1 only when strictly more than half the peaks
// have it (ties give 0); at most MAX_PEAKS peaks per spectrum; host-loaded
// item memories.
//
// Interface: peak_valid/peak_ready with peak_bin, peak_int and peak_last
// (last peak of the spectrum). hv_valid/hv_ready deliver the DHV-bit vector.
// Timing: one peak per cycle; the vector is ready three cycles after the
// last peak is accepted (memory read, bundling, majority).
module id_level_encoder #(
  parameter int unsigned DHV       = rapidoms_pkg::DHV,
  parameter int unsigned N_ID      = 1024,
  parameter int unsigned N_LEVEL   = 16,
  parameter int unsigned MAX_PEAKS = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // item memory load port (host)
  input  logic                       id_we,
  input  logic [$clog2(N_ID)-1:0]    id_waddr,
  input  logic                       lvl_we,
  input  logic [$clog2(N_LEVEL)-1:0] lvl_waddr,
  input  logic [DHV-1:0]             item_wdata,
  // peak stream
  input  logic                       peak_valid,
  output logic                       peak_ready,
  input  logic [$clog2(N_ID)-1:0]    peak_bin,
  input  logic [15:0]                peak_int,
  input  logic                       peak_last,
  // encoded spectrum
  output logic                       hv_valid,
  input  logic                       hv_ready,
  output logic [DHV-1:0]             hv
);
  localparam int unsigned CW = $clog2(MAX_PEAKS + 1);
  localparam int unsigned LW = $clog2(N_LEVEL);

  logic [DHV-1:0] id_hv, lvl_hv;
  logic [LW-1:0]  level;
  logic           accept;

  // stage 1 (memory read) and stage 2 (bundling) control
  logic           s1_valid, s1_last;
  logic           s2_done;
  logic [CW-1:0]  cnt [DHV];
  logic [CW-1:0]  npeaks;
  logic           busy;       // a finished spectrum is waiting in the output

  // stop taking peaks from the last peak of a spectrum until its vector leaves
  logic           draining;
  assign peak_ready = !draining && !busy;
  assign accept     = peak_valid && peak_ready;

  always_comb begin
    level = LW'((32'(peak_int) * N_LEVEL) >> 16);
  end

  hv_item_memory #(.DHV(DHV), .N_ITEMS(N_ID)) u_id_mem (
    .clk, .we(id_we), .waddr(id_waddr), .wdata(item_wdata),
    .re(accept), .raddr(peak_bin), .rdata(id_hv));

  hv_item_memory #(.DHV(DHV), .N_ITEMS(N_LEVEL)) u_lvl_mem (
    .clk, .we(lvl_we), .waddr(lvl_waddr), .wdata(item_wdata),
    .re(accept), .raddr(level), .rdata(lvl_hv));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_last  <= 1'b0;
      s2_done  <= 1'b0;
      draining <= 1'b0;
      busy     <= 1'b0;
      hv_valid <= 1'b0;
      hv       <= '0;
      npeaks   <= '0;
      for (int i = 0; i < DHV; i++) cnt[i] <= '0;
    end else begin
      // stage 1: item vectors are being read
      s1_valid <= accept;
      s1_last  <= accept && peak_last;
      if (accept && peak_last) draining <= 1'b1;

      // stage 2: bind (XOR) and bundle (count)
      s2_done <= s1_valid && s1_last;
      if (s1_valid) begin
        npeaks <= npeaks + 1'b1;
        for (int i = 0; i < DHV; i++)
          cnt[i] <= cnt[i] + CW'(id_hv[i] ^ lvl_hv[i]);
      end

      // stage 3: bitwise majority, restart the counters
      if (s2_done) begin
        for (int i = 0; i < DHV; i++) begin
          hv[i]  <= ({1'b0, cnt[i]} << 1) > {1'b0, npeaks};
          cnt[i] <= '0;
        end
        npeaks   <= '0;
        hv_valid <= 1'b1;
        busy     <= 1'b1;
        draining <= 1'b0;
      end else if (hv_valid && hv_ready) begin
        hv_valid <= 1'b0;
        busy     <= 1'b0;
      end
    end
  end

`ifndef SYNTHESIS
  a_peak_limit: assert property (@(posedge clk) disable iff (!rst_n)
                                 s1_valid |-> npeaks < CW'(MAX_PEAKS));
`endif
endmodule
