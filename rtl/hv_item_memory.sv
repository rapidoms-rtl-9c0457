// hv_item_memory: the ID memory or the Level memory of the ID-Level encoder.
// It holds N_ITEMS predefined hypervectors of DHV bits (one per m/z bin for
// the ID memory, one per quantised intensity level for the Level memory) and
// returns a whole vector per cycle, as the encoder's fully partitioned arrays
// do. The vectors are predefined and written by the host through the write
// port before encoding; their generation (random IDs, correlated levels) is
// done outside. Registered read, one cycle of latency.
module hv_item_memory #(
  parameter int unsigned DHV     = rapidoms_pkg::DHV,
  parameter int unsigned N_ITEMS = 1024
) (
  input  logic                       clk,
  input  logic                       we,
  input  logic [$clog2(N_ITEMS)-1:0] waddr,
  input  logic [DHV-1:0]             wdata,
  input  logic                       re,
  input  logic [$clog2(N_ITEMS)-1:0] raddr,
  output logic [DHV-1:0]             rdata
);
  logic [DHV-1:0] mem [N_ITEMS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
