// tb_mean_remover: three PRIs of random samples with a DC offset. The first
// must pass unchanged (mean 0); each later one must have the previous PRI's
// mean (sum / N, rounded toward zero, computed here) subtracted, with
// saturation at the 16-bit limits.
module tb_mean_remover;
  localparam int N = 64;
  logic clk = 0, rst_n = 0, in_valid = 0, in_last = 0, out_valid;
  radar_pkg::cplx_t in_data = '0, out_data, mean;
  int checks = 0, failures = 0;

  mean_remover #(.N(N)) dut (.clk, .rst_n, .in_valid, .in_last, .in_data, .out_valid, .out_data, .mean);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int sat(input int v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int mi = 0, mq = 0, si, sq, xi, xq, bad;
    int off_i [3] = '{1200, -3000, 25000};
    int off_q [3] = '{-700, 4000, -20000};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int pri = 0; pri < 3; pri++) begin
      si = 0; sq = 0; bad = 0;
      for (int n = 0; n < N; n++) begin
        xi = off_i[pri] + $signed($urandom_range(0, 4000)) - 2000;
        xq = off_q[pri] + $signed($urandom_range(0, 4000)) - 2000;
        if (pri == 2 && n == 5) begin xi = 32767; xq = -32768; end
        @(negedge clk) begin
          in_valid = 1; in_last = (n == N - 1);
          in_data.i = 16'(xi); in_data.q = 16'(xq);
        end
        @(posedge clk); #1;
        if (!out_valid || int'(out_data.i) != sat(xi - mi) || int'(out_data.q) != sat(xq - mq)) begin
          bad++;
          $display("pri %0d n %0d: got %0d,%0d expected %0d,%0d", pri, n, out_data.i, out_data.q, sat(xi - mi), sat(xq - mq));
        end
        si += xi; sq += xq;
      end
      @(negedge clk) begin in_valid = 0; in_last = 0; end
      check(bad == 0, $sformatf("PRI %0d output errors %0d", pri, bad));
      mi = si / N; mq = sq / N;
      @(posedge clk); #1;
      check(int'(mean.i) == mi && int'(mean.q) == mq, $sformatf("PRI %0d mean %0d,%0d expected %0d,%0d", pri, mean.i, mean.q, mi, mq));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
