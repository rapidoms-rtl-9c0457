// Testbench of search_kernel with 32 queries in parallel, the lane count of the
// larger second-generation device: 80 queries against two merged blocks, then
// 128 against one, results and run cycle count checked. See search_kernel_bench.
module tb_search_kernel_q32;
  search_kernel_bench #(.QB(32)) u_bench ();

  initial begin
    wait (u_bench.finished);
    $display("TB_RESULT checks=%0d failures=%0d", u_bench.checks, u_bench.failures);
    $finish;
  end
endmodule
