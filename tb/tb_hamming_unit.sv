// Self-checking testbench of hamming_unit at the default chunk width: random
// 4096-bit vector pairs streamed as 16 chunks, back to back, with the result
// checked against a whole-vector popcount and one cycle after the last chunk.
module tb_hamming_unit;
  localparam int CW = 256, DHV = 4096, F = DHV / CW;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_first, in_last;
  logic [CW-1:0] q_chunk, r_chunk;
  logic hd_valid;
  logic [$clog2(DHV+1)-1:0] hd;
  int checks = 0, failures = 0;
  int expected [$];

  hamming_unit #(.CHUNK_W(CW), .DHV(DHV)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker: hd_valid exactly one cycle after a last chunk
  logic last_d;
  always @(posedge clk) begin
    if (rst_n) begin
      if (hd_valid != last_d) begin failures++; $display("hd_valid timing"); end
      if (hd_valid) begin
        checks++;
        if (expected.size() == 0 || int'(hd) != expected[0]) begin
          failures++; $display("distance %0d expected %0d", hd, expected.size() ? expected[0] : -1);
        end
        if (expected.size()) void'(expected.pop_front());
      end
    end
    last_d <= in_valid && in_last;
  end

  initial begin
    logic [DHV-1:0] a, b;
    last_d = 0;
    in_valid = 0; in_first = 0; in_last = 0; q_chunk = '0; r_chunk = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < 200; v++) begin
      for (int w = 0; w < DHV / 32; w++) begin a[w*32 +: 32] = $urandom; b[w*32 +: 32] = $urandom; end
      if (v == 0) b = a;       // distance 0
      if (v == 1) b = ~a;      // distance DHV
      expected.push_back($countones(a ^ b));
      for (int c = 0; c < F; c++) begin
        // occasional bubble inside a vector
        while (($urandom % 8) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_first = (c == 0); in_last = (c == F - 1);
        q_chunk = a[c*CW +: CW]; r_chunk = b[c*CW +: CW];
        @(negedge clk);
      end
      in_valid = 0;
    end
    repeat (4) @(negedge clk);
    checks++;
    if (expected.size() != 0) begin failures++; $display("missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
