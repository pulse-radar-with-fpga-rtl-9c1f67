// tb_pulse_sync: sends Start-trigger-2-like pulses from a 120 MHz clock to a
// 30 MHz clock and checks that each arrives exactly once, as a one-cycle
// pulse, 2 to 5 destination clocks later.
module tb_pulse_sync;
  logic clk_src = 0, clk_dst = 0, rst_n = 0, p_src = 0, p_dst;
  int checks = 0, failures = 0, n_dst = 0, last_len = 0;
  realtime t_src, t_dst;

  pulse_sync dut (.clk_src, .clk_dst, .rst_n, .pulse_src(p_src), .pulse_dst(p_dst));

  always #4.167 clk_src = ~clk_src;
  always #16.667 clk_dst = ~clk_dst;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk_dst) if (rst_n && p_dst) begin n_dst++; t_dst = $realtime; end

  initial begin
    repeat (20000) @(posedge clk_dst);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d;
    repeat (4) @(posedge clk_dst);
    rst_n = 1;
    repeat (2) @(posedge clk_dst);
    n_dst = 0;
    for (int i = 0; i < 20; i++) begin
      repeat ($urandom_range(1, 13)) @(posedge clk_src);
      @(negedge clk_src) p_src = 1;
      t_src = $realtime;
      @(negedge clk_src) p_src = 0;
      repeat (8) @(posedge clk_dst);
      check(n_dst == i + 1, $sformatf("pulse %0d delivered once (%0d)", i, n_dst));
      d = int'((t_dst - t_src) / 33.334);
      check(d >= 1 && d <= 5, $sformatf("delay %0d destination clocks", d));
      check(!p_dst, "pulse is one cycle long");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
