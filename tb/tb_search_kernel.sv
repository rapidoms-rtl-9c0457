// Testbench of search_kernel with 4 queries in parallel: 10 queries against two
// merged blocks, then 16 against one, results and run cycle count checked.
// See search_kernel_bench.
module tb_search_kernel;
  search_kernel_bench #(.QB(4)) u_bench ();

  initial begin
    wait (u_bench.finished);
    $display("TB_RESULT checks=%0d failures=%0d", u_bench.checks, u_bench.failures);
    $finish;
  end
endmodule
