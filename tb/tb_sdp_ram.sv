// Self-checking testbench of sdp_ram: random writes and reads against an
// array model, checking the one-cycle registered read.
module tb_sdp_ram;
  localparam int W = 32, D = 64;
  logic clk = 0;
  logic we, re;
  logic [$clog2(D)-1:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  sdp_ram #(.WIDTH(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] expect_q;
    logic         pend;
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    // fill every word
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1; waddr = a[$clog2(D)-1:0]; wdata = W'($urandom); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    pend = 0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      if (pend) begin
        checks++;
        if (rdata !== expect_q) begin failures++; $display("read mismatch %h %h", rdata, expect_q); end
      end
      re = ($urandom % 2) == 1; raddr = $clog2(D)'($urandom);
      pend = re; expect_q = model[raddr];
      we = ($urandom % 2) == 1; waddr = $clog2(D)'($urandom); wdata = W'($urandom);
      // read-before-write on a collision
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
