// tb_phase_block: streams random complex values in all four quadrants (and
// the axes) one per clock and compares the phase with $atan2 computed here,
// in units of 2^-32 turn, within 32 units (about 5e-8 rad); checks the
// 31-clock latency and one result per clock.
module tb_phase_block;
  localparam int LAT = 31, NS = 400;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [41:0] re = '0, im = '0;
  logic signed [31:0] phase;
  int checks = 0, failures = 0;
  longint exp_q [$];
  int in_cyc [$];
  int cyc = 0;
  bit mon = 0;

  phase_block dut (.clk, .rst_n, .in_valid, .re, .im, .out_valid, .phase);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (mon && out_valid) begin
      longint e, d;
      int c0;
      e = exp_q.pop_front();
      c0 = in_cyc.pop_front();
      d = longint'(phase) - e;
      if (d > 64'sd2147483648) d -= 64'sd4294967296;
      if (d < -64'sd2147483648) d += 64'sd4294967296;
      check(d >= -32 && d <= 32, $sformatf("phase %0d expected %0d", phase, e));
      check(cyc - c0 == LAT, $sformatf("latency %0d", cyc - c0));
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real a;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk) mon = 1;
    for (int n = 0; n < NS; n++) begin
      @(negedge clk);
      in_valid = (n % 5 != 2);
      re = 42'({$urandom, $urandom}) >>> $urandom_range(0, 12);
      im = 42'({$urandom, $urandom}) >>> $urandom_range(0, 12);
      if (n == 0) begin re = 42'sd1000000000; im = 0; end
      if (n == 1) begin re = 0; im = 42'sd1000000000; end
      if (n == 3) begin re = -42'sd1000000000; im = 1; end
      if (n == 4) begin re = 0; im = -42'sd1000000000; end
      if (in_valid) begin
        a = $atan2(real'(im), real'(re)) / (2.0 * 3.14159265358979323846) * 4294967296.0;
        exp_q.push_back(longint'(a));
        in_cyc.push_back(cyc);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    check(exp_q.size() == 0, $sformatf("%0d results missing", exp_q.size()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
