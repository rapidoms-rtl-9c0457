// Workload testbench of rapidoms_top in the HEK293 configuration: 5 ppm
// standard window, 75 Da open window, 1 % FDR, a full query set of 2048
// queries against two full 4096-reference blocks (the dataset itself, 47k
// queries and 3M references, is this run repeated over 23 query sets and
// 733 blocks). See rapidoms_bench.
module tb_rapidoms_hek293;
  rapidoms_bench #(.NQ(2048), .NR_A(4096), .NR_B(4096), .NR_SKIP(64), .N_ENC(8),
                   .STD_PPM(5), .WATCHDOG(40000000)) u_bench ();

  initial begin
    wait (u_bench.finished);
    $display("TB_RESULT checks=%0d failures=%0d", u_bench.checks, u_bench.failures);
    $finish;
  end
endmodule
