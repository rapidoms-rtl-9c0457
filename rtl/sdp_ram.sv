// sdp_ram: simple dual-port RAM, one write port and one read port with a
// registered (one-cycle) read, the behaviour of an FPGA block or Ultra RAM.
// The search kernel uses it as the on-chip reference hypervector cache
// (MAX_R x FACTOR words of DHV/FACTOR bits, 16 Mbit at the default sizes),
// as the reference metadata cache and as the per-query result buffers.
// The accelerator keeps the reference block in URAM; the read latency of one
// cycle and read-before-write on an address collision are this design's
// choice.
module sdp_ram #(
  parameter int unsigned WIDTH = 256,
  parameter int unsigned DEPTH = 65536
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
