// Self-checking testbench of hv_item_memory: loads random item vectors and
// reads them back in random order, checking the registered read.
module tb_hv_item_memory;
  localparam int DHV = 512, N = 32;
  logic clk = 0;
  logic we, re;
  logic [$clog2(N)-1:0] waddr, raddr;
  logic [DHV-1:0] wdata, rdata;
  logic [DHV-1:0] model [N];
  int checks = 0, failures = 0;

  hv_item_memory #(.DHV(DHV), .N_ITEMS(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    for (int a = 0; a < N; a++) begin
      @(negedge clk);
      we = 1; waddr = a[$clog2(N)-1:0];
      for (int w = 0; w < DHV / 32; w++) wdata[w*32 +: 32] = $urandom;
      model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 200; i++) begin
      re = 1; raddr = $clog2(N)'($urandom);
      @(negedge clk);
      checks++;
      if (rdata !== model[raddr]) begin failures++; $display("item %0d mismatch", raddr); end
      re = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
