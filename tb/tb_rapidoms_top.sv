// End-to-end testbench of rapidoms_top at its default sizes with a small
// workload: 40 queries (three query groups) against two selected blocks of 40
// and 30 references, two skipped blocks. See rapidoms_bench.
module tb_rapidoms_top;
  rapidoms_bench #(.NQ(40), .NR_A(40), .NR_B(30), .NR_SKIP(12), .N_ENC(4)) u_bench ();

  initial begin
    wait (u_bench.finished);
    $display("TB_RESULT checks=%0d failures=%0d", u_bench.checks, u_bench.failures);
    $finish;
  end
endmodule
