// dram_model: behavioural model of the board DRAM behind the accelerator's
// read port (not synthesizable). Words of 256 bits live in an associative
// array that the testbench fills through write_word(). Read requests are
// queued and answered in order after LATENCY cycles; request acceptance and
// data delivery stall at random (STALL_PCT percent) to exercise back-pressure.
module dram_model #(
  parameter int LATENCY   = 4,
  parameter int STALL_PCT = 20
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         rd_req_valid,
  output logic         rd_req_ready,
  input  logic [31:0]  rd_req_addr,
  output logic         rd_valid,
  input  logic         rd_ready,
  output logic [255:0] rd_data
);
  logic [255:0] mem [int unsigned];
  int unsigned  pend_addr [$];
  int           pend_time [$];
  int           now = 0;
  int           reads = 0;

  function automatic void write_word(input int unsigned a, input logic [255:0] d);
    mem[a] = d;
  endfunction

  function automatic logic [255:0] read_word(input int unsigned a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  always_ff @(posedge clk) now <= now + 1;

  // ready / valid are recomputed just after each clock edge
  initial begin
    rd_req_ready = 0; rd_valid = 0; rd_data = '0;
    forever begin
      @(posedge clk);
      if (rst_n) begin
        if (rd_valid && rd_ready) begin
          void'(pend_addr.pop_front()); void'(pend_time.pop_front());
          reads++;
        end
        if (rd_req_valid && rd_req_ready) begin
          pend_addr.push_back(rd_req_addr); pend_time.push_back(now + LATENCY);
        end
      end
      #1;
      rd_req_ready = ($urandom % 100) >= STALL_PCT;
      rd_valid     = (pend_addr.size() != 0) && (pend_time[0] <= now) && (($urandom % 100) >= STALL_PCT);
      rd_data      = rd_valid ? read_word(pend_addr[0]) : '0;
    end
  end
endmodule
