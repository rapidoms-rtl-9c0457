// hamming_unit: one distance lane of the search kernel. Each cycle it XORs a
// DHV/FACTOR-bit query chunk with the matching reference chunk, counts the
// set bits (fully unrolled popcount) and adds the count to a running sum.
// in_first marks chunk 0 of a vector pair and restarts the sum; in_last marks
// the final chunk, after which hd_valid pulses one cycle later with the
// Hamming distance of the complete vectors. Latency: one register stage.
module hamming_unit #(
  parameter int unsigned CHUNK_W = rapidoms_pkg::CHUNK_W,
  parameter int unsigned DHV     = rapidoms_pkg::DHV
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     in_first,
  input  logic                     in_last,
  input  logic [CHUNK_W-1:0]       q_chunk,
  input  logic [CHUNK_W-1:0]       r_chunk,
  output logic                     hd_valid,
  output logic [$clog2(DHV+1)-1:0] hd
);
  localparam int unsigned DW = $clog2(DHV + 1);

  logic [DW-1:0] acc, pop, sum;

  always_comb begin
    pop = '0;
    for (int i = 0; i < CHUNK_W; i++) pop = pop + DW'(q_chunk[i] ^ r_chunk[i]);
    sum = (in_first ? '0 : acc) + pop;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc        <= '0;
      hd_valid <= 1'b0;
      hd       <= '0;
    end else begin
      hd_valid <= in_valid && in_last;
      if (in_valid) begin
        acc <= sum;
        if (in_last) hd <= sum;
      end
    end
  end
endmodule
