// Full-size testbench of rapidoms_top in the iPRG2012 configuration (20 ppm
// standard window, 75 Da open window, 1 % FDR): one complete search of a query set
// of MAX_Q = 2048 queries (128 query groups) against a full reference block of
// MAX_R = 4096 references plus a second block of 512, with the two skipped
// blocks of the small test. See rapidoms_bench.
module tb_rapidoms_full;
  rapidoms_bench #(.NQ(2048), .NR_A(4096), .NR_B(512), .NR_SKIP(64), .N_ENC(8),
                   .WATCHDOG(30000000)) u_bench ();

  initial begin
    wait (u_bench.finished);
    $display("TB_RESULT checks=%0d failures=%0d", u_bench.checks, u_bench.failures);
    $finish;
  end
endmodule
