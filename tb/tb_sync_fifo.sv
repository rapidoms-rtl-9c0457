// Self-checking testbench of sync_fifo: random pushes and pops against a
// queue model, checking data order, occupancy and the full/empty flags.
module tb_sync_fifo;
  localparam int W = 16, D = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];
  int saw_full = 0;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      // phase 1 mostly pushes, phase 2 mostly pops, then mixed
      in_valid  = ($urandom % 100) < ((cyc < 1000) ? 80 : (cyc < 2000) ? 30 : 50);
      out_ready = ($urandom % 100) < ((cyc < 1000) ? 30 : (cyc < 2000) ? 80 : 50);
      in_data   = W'($urandom);
      #1;
      checks++;
      if (count != model.size() || out_valid != (model.size() != 0) || in_ready != (model.size() < D)) begin
        failures++;
        $display("flag mismatch count=%0d model=%0d", count, model.size());
      end
      if (count == D) saw_full++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != model[0]) begin
          failures++;
          $display("data mismatch %h vs %h", out_data, model[0]);
        end
      end
      begin
        logic do_pop, do_push;
        do_pop = out_valid && out_ready; do_push = in_valid && in_ready;
        @(negedge clk);
        if (do_pop) void'(model.pop_front());
        if (do_push) model.push_back(in_data);
      end
    end
    checks++;
    if (saw_full == 0) begin failures++; $display("FIFO never filled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
