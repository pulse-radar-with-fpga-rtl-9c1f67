// tb_pri_trigger_gen: checks the PRI trigger period, the first pulse after
// enabling, a period change taking effect at the end of an interval, and
// silence while disabled.
module tb_pri_trigger_gen;
  logic clk = 0, rst_n = 0, enable = 0;
  logic [31:0] pri_period = 32'd10;
  logic trig;
  int checks = 0, failures = 0;
  int cyc = 0, last_pulse = -1, pulses = 0;
  int intervals [$];

  pri_trigger_gen dut (.clk_samp(clk), .rst_n, .enable, .pri_period, .start_trig1(trig));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && trig) begin
      pulses++;
      if (last_pulse >= 0) intervals.push_back(cyc - last_pulse);
      last_pulse = cyc;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int en_cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    pulses = 0; last_pulse = -1; intervals.delete();
    repeat (2) @(posedge clk);
    check(pulses == 0, "no pulse while disabled");
    @(negedge clk) enable = 1;
    en_cyc = cyc;
    repeat (2) @(posedge clk);
    #1 check(pulses == 1 && last_pulse == en_cyc + 2, "first pulse two edges after enable");
    repeat (55) @(posedge clk);
    check(intervals.size() == 5, $sformatf("5 intervals, got %0d", intervals.size()));
    foreach (intervals[i]) check(intervals[i] == 10, $sformatf("interval %0d = %0d", i, intervals[i]));
    intervals.delete();
    @(negedge clk) pri_period = 32'd7;
    repeat (40) @(posedge clk);
    // the first interval may still be the old one
    for (int i = 1; i < intervals.size(); i++) check(intervals[i] == 7, $sformatf("new interval %0d", intervals[i]));
    check(intervals.size() >= 4, "pulses after change");
    @(negedge clk) enable = 0;
    pulses = 0;
    repeat (30) @(posedge clk);
    check(pulses == 0, "silent when disabled");
    // full-size PRI of 10 ms at 120 MHz
    intervals.delete();
    last_pulse = -1;
    @(negedge clk) begin pri_period = 32'd1_200_000; enable = 1; end
    repeat (2_400_010) @(posedge clk);
    check(intervals.size() == 2 && intervals[0] == 1_200_000 && intervals[1] == 1_200_000, "10 ms PRI");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
