// tb_rx1_down_counter: checks the 448-step descending address sweep, the
// read enable length, the single end-count pulse on address 0 and that a
// start during the sweep is ignored.
module tb_rx1_down_counter;
  localparam int K = 448;
  logic clk = 0, rst_n = 0, start = 0;
  logic [8:0] addr;
  logic rd_en, end_count;
  int checks = 0, failures = 0;

  rx1_down_counter dut (.clk, .rst_n, .start, .addr, .rd_en, .end_count);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, bad, n_end, exp_a;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      n = 0; bad = 0; n_end = 0; exp_a = K - 1;
      for (int c = 0; c < K + 10; c++) begin
        if (c == 50) start = 1;
        if (c == 51) start = 0;
        if (rd_en) begin
          n++;
          if (addr != 9'(exp_a)) bad++;
          if (end_count != (exp_a == 0)) bad++;
          exp_a--;
        end
        if (end_count) n_end++;
        @(negedge clk);
      end
      check(n == K, $sformatf("read enable for %0d cycles, got %0d", K, n));
      check(bad == 0, $sformatf("address/end-count errors %0d", bad));
      check(n_end == 1, "one end count");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
