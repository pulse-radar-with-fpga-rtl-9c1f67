// tb_magnitude_block: streams random 42-bit complex values (and the extreme
// ones) one per clock and checks floor(sqrt(re^2+im^2)) against a value
// computed here (floating-point estimate corrected with exact 128-bit
// integer comparisons), the 45-clock latency and one result per clock.
module tb_magnitude_block;
  localparam int LAT = 45, NS = 300;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [41:0] re = '0, im = '0;
  logic [42:0] mag;
  int checks = 0, failures = 0;
  longint exp_q [$];
  int in_cyc [$];
  int cyc = 0;
  bit mon = 0;

  magnitude_block dut (.clk, .rst_n, .in_valid, .re, .im, .out_valid, .mag);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic longint isqrt(input logic [127:0] x);
    longint r;
    r = longint'($sqrt(real'(x)));
    while (r > 0 && 128'(r) * 128'(r) > x) r--;
    while (128'(r + 1) * 128'(r + 1) <= x) r++;
    return r;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (mon && out_valid) begin
      longint e;
      int c0;
      e = exp_q.pop_front();
      c0 = in_cyc.pop_front();
      check(longint'(mag) == e, $sformatf("mag %0d expected %0d", mag, e));
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
    logic signed [127:0] r2, i2;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk) mon = 1;
    for (int n = 0; n < NS; n++) begin
      @(negedge clk);
      in_valid = (n % 7 != 3);
      re = 42'({$urandom, $urandom}) >>> $urandom_range(0, 40);
      im = 42'({$urandom, $urandom}) >>> $urandom_range(0, 40);
      if (n == 0) begin re = {1'b1, 41'b0}; im = {1'b1, 41'b0}; end
      if (n == 1) begin re = {1'b0, {41{1'b1}}}; im = {1'b1, 41'b0}; end
      if (n == 2) begin re = 0; im = 0; end
      if (in_valid) begin
        r2 = re; i2 = im;
        exp_q.push_back(isqrt(128'(r2 * r2 + i2 * i2)));
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
