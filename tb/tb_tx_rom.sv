// tb_tx_rom: compares every ROM word with the chirp formula computed here in
// floating point (tolerance 1 LSB), checks the one-clock read latency and
// that the output is zero when not enabled.
module tb_tx_rom;
  localparam int K = 448;
  logic clk = 0, rst_n = 0, en = 0;
  logic [8:0] addr = '0;
  radar_pkg::cplx_t dout;
  int checks = 0, failures = 0;

  tx_rom dut (.clk, .rst_n, .en, .addr, .dout);

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
    real pi, fs, b, tau, t, ph;
    int ei, eq;
    pi = 3.14159265358979; fs = 120.0e6; b = 40.0e6; tau = K / fs;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < K; n++) begin
      @(negedge clk) begin en = 1; addr = 9'(n); end
      @(posedge clk); #1;
      t  = (n - (K - 1) / 2.0) / fs;
      ph = pi * b / tau * t * t;
      ei = $rtoi(30000.0 * $cos(ph) + (($cos(ph) >= 0) ? 0.5 : -0.5));
      eq = $rtoi(30000.0 * $sin(ph) + (($sin(ph) >= 0) ? 0.5 : -0.5));
      check((int'(dout.i) - ei) inside {[-1:1]} && (int'(dout.q) - eq) inside {[-1:1]},
            $sformatf("sample %0d: %0d,%0d expected %0d,%0d", n, dout.i, dout.q, ei, eq));
    end
    @(negedge clk) en = 0;
    @(posedge clk); #1;
    check(dout == '0, "silent when not enabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
