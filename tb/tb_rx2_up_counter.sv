// tb_rx2_up_counter: checks the 3136-step ascending sweep, that data valid
// starts with the 448th address and lasts 3136-448+1 = 2689 cycles, and the
// done pulse.
module tb_rx2_up_counter;
  localparam int K = 448, D = 3136;
  logic clk = 0, rst_n = 0, start = 0;
  logic [11:0] addr;
  logic rd_en, dv, done;
  int checks = 0, failures = 0;

  rx2_up_counter dut (.clk, .rst_n, .start, .addr, .rd_en, .data_valid(dv), .done);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, bad, n_dv, n_done, first_dv;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      n = 0; bad = 0; n_dv = 0; n_done = 0; first_dv = -1;
      for (int c = 0; c < D + 10; c++) begin
        if (c == 1000) start = 1;
        if (c == 1001) start = 0;
        if (rd_en) begin
          if (addr != 12'(n)) bad++;
          if (done != (n == D - 1)) bad++;
          n++;
        end
        if (dv) begin
          n_dv++;
          if (first_dv < 0) first_dv = n;   // clock count including this one
        end
        if (done) n_done++;
        @(negedge clk);
      end
      check(n == D, $sformatf("sweep of %0d, got %0d", D, n));
      check(bad == 0, $sformatf("address errors %0d", bad));
      check(first_dv == K, $sformatf("data valid after %0d clocks, got %0d", K, first_dv));
      check(n_dv == D - K + 1, $sformatf("valid lags %0d", n_dv));
      check(n_done == 1, "one done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
