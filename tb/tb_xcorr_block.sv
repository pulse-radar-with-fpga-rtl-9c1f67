// tb_xcorr_block: system-clock cross-correlator with small sizes (K=16,
// 64-sample window). Random RX1/RX2 contents with DC offsets (RX2 holding a
// delayed, rotated copy of RX1) are written into two RX memories; each PRI
// the block is started and every correlation lag, magnitude word and phase
// word is compared with a model computed here: previous-PRI mean removal,
// conjugation, sum of products, exact integer square root and atan2. Also
// checks the number of lags, the cycle count from start to the last result,
// that Buffer 1 holds still during the RX2 sweep, that a start while busy
// is ignored, and that the first PRI uses a zero mean.
module tb_xcorr_block;
  localparam int K = 16, D = 64, NL = D - K + 1, FD = 128;
  // clocks from the edge that samples `start` to the edge that writes the
  // last magnitude: K + D reads, 4 pipeline stages, 45 magnitude stages
  localparam int LAT_TOTAL = K + D + 4 + 45;
  logic clk = 0, rst_n = 0, start = 0, busy;
  int checks = 0, failures = 0;

  logic [3:0] rx1_raddr; logic [5:0] rx2_raddr;
  logic rx1_re, rx2_re;
  radar_pkg::cplx_t rx1_rdata, rx2_rdata, wd1, wd2;
  logic we1 = 0, we2 = 0;
  logic [3:0] wa1 = '0; logic [5:0] wa2 = '0;
  logic mag_rd = 0, ph_rd = 0, mag_dv, ph_dv, mag_empty, ph_empty, ovf;
  logic [63:0] mag_dout, ph_dout;
  logic [7:0] mag_count, ph_count;

  always #5 clk = ~clk;

  rx_memory #(.DEPTH(K)) u_m1 (.wclk(clk), .we(we1), .waddr(wa1), .wdata(wd1), .rclk(clk), .re(rx1_re), .raddr(rx1_raddr), .rdata(rx1_rdata));
  rx_memory #(.DEPTH(D)) u_m2 (.wclk(clk), .we(we2), .waddr(wa2), .wdata(wd2), .rclk(clk), .re(rx2_re), .raddr(rx2_raddr), .rdata(rx2_rdata));

  xcorr_block #(.K(K), .RX2_DEPTH(D), .FIFO_DEPTH(FD)) dut (
    .clk, .rst_n, .start, .busy, .rx1_raddr, .rx1_re, .rx1_rdata, .rx2_raddr, .rx2_re, .rx2_rdata,
    .mag_rd_en(mag_rd), .mag_dout, .mag_dout_valid(mag_dv), .mag_empty, .mag_count,
    .ph_rd_en(ph_rd), .ph_dout, .ph_dout_valid(ph_dv), .ph_empty, .ph_count, .fifo_overflow(ovf));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int sat(input int v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction

  function automatic longint isqrt(input logic [127:0] x);
    longint r;
    r = longint'($sqrt(real'(x)));
    while (r > 0 && 128'(r) * 128'(r) > x) r--;
    while (128'(r + 1) * 128'(r + 1) <= x) r++;
    return r;
  endfunction

  // monitors
  int cyc = 0, n_xc = 0, t_start = 0, t_last_mag = 0, buf1_moves = 0;
  bit mon = 0, s1v_prev = 0;
  longint got_re [$], got_im [$];
  radar_pkg::cplx_t b1_prev [K];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (mon) begin
      if (dut.xc_valid) begin got_re.push_back(longint'(dut.xc_re)); got_im.push_back(longint'(dut.xc_im)); end
      if (dut.mag_v) t_last_mag <= cyc;
      if (dut.s2_v && !dut.s1_v && !s1v_prev) begin
        for (int k = 0; k < K; k++) if (dut.buf1[k] != b1_prev[k]) buf1_moves++;
      end
    end
    for (int k = 0; k < K; k++) b1_prev[k] <= dut.buf1[k];
    s1v_prev <= dut.s1_v;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int x1i [K], x1q [K], x2i [D], x2q [D];
    int m1i = 0, m1q = 0, m2i = 0, m2q = 0, s;
    int c1i [K], c1q [K], c2i [D], c2q [D];
    longint er [NL], ei [NL];
    longint e, d;
    real a, tol;
    int bad, bad_mag, bad_ph, dly;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk) mon = 1;
    for (int pri = 0; pri < 3; pri++) begin
      dly = 5 + 7 * pri;
      // fill memories: RX1 reference, RX2 = delayed RX1 rotated by j, offsets
      for (int k = 0; k < K; k++) begin
        x1i[k] = $signed($urandom_range(0, 16000)) - 8000 + 500 * (pri + 1);
        x1q[k] = $signed($urandom_range(0, 16000)) - 8000 - 300 * pri;
      end
      for (int a2 = 0; a2 < D; a2++) begin
        x2i[a2] = $signed($urandom_range(0, 200)) - 100 - 700;
        x2q[a2] = $signed($urandom_range(0, 200)) - 100 + 400;
        if (a2 >= dly && a2 < dly + K) begin
          x2i[a2] += -x1q[a2 - dly] / 2;
          x2q[a2] +=  x1i[a2 - dly] / 2;
        end
      end
      for (int a2 = 0; a2 < D; a2++) begin
        @(negedge clk);
        we2 = 1; wa2 = 6'(a2); wd2 = '{16'(x2i[a2]), 16'(x2q[a2])};
        we1 = (a2 < K); wa1 = 4'(a2 % K); wd1 = '{16'(x1i[a2 % K]), 16'(x1q[a2 % K])};
      end
      @(negedge clk) begin we1 = 0; we2 = 0; end
      // model
      for (int k = 0; k < K; k++) begin c1i[k] = sat(x1i[k] - m1i); c1q[k] = sat(-sat(x1q[k] - m1q)); end
      for (int a2 = 0; a2 < D; a2++) begin c2i[a2] = sat(x2i[a2] - m2i); c2q[a2] = sat(x2q[a2] - m2q); end
      if (pri == 0) check(m1i == 0 && m2q == 0 && dut.mean1 == '0 && dut.mean2 == '0, "first PRI uses zero mean");
      for (int n = 0; n < NL; n++) begin
        er[n] = 0; ei[n] = 0;
        for (int k = 0; k < K; k++) begin
          er[n] += longint'(c1i[k]) * c2i[n + k] - longint'(c1q[k]) * c2q[n + k];
          ei[n] += longint'(c1i[k]) * c2q[n + k] + longint'(c1q[k]) * c2i[n + k];
        end
      end
      // run
      got_re.delete(); got_im.delete(); buf1_moves = 0;
      @(negedge clk) start = 1;
      t_start = cyc;
      @(negedge clk) start = 0;
      repeat (40) @(negedge clk);
      start = 1;                          // ignored: busy
      @(negedge clk) start = 0;
      repeat (K + D + 60) @(negedge clk);
      check(!busy, "idle after the sweep");
      check(got_re.size() == NL, $sformatf("PRI %0d: %0d lags, expected %0d", pri, got_re.size(), NL));
      check(t_last_mag - t_start == LAT_TOTAL, $sformatf("cycles to last result %0d, expected %0d", t_last_mag - t_start, LAT_TOTAL));
      check(buf1_moves == 0, "Buffer 1 frozen during the RX2 sweep");
      bad = 0;
      for (int n = 0; n < NL && n < got_re.size(); n++) if (got_re[n] != er[n] || got_im[n] != ei[n]) bad++;
      if (bad != 0) $display("dbg lag0 got %0d,%0d exp %0d,%0d mean1 %0d,%0d m2 %0d,%0d tbm %0d %0d", got_re[0], got_im[0], er[0], ei[0], dut.mean1.i, dut.mean1.q, dut.mean2.i, dut.mean2.q, m1i, m2i);
      check(bad == 0, $sformatf("PRI %0d: %0d correlation mismatches", pri, bad));
      // the echo peak
      begin
        longint best; int bn;
        best = -1; bn = -1;
        for (int n = 0; n < got_re.size(); n++)
          if (got_re[n] * got_re[n] + got_im[n] * got_im[n] > best) begin best = got_re[n] * got_re[n] + got_im[n] * got_im[n]; bn = n; end
        check(bn == dly, $sformatf("peak at lag %0d, expected %0d", bn, dly));
      end
      // host reads both FIFOs
      check(mag_count == 8'(NL) && ph_count == 8'(NL), "FIFOs hold one profile");
      bad_mag = 0; bad_ph = 0;
      for (int n = 0; n < NL; n++) begin
        @(negedge clk) begin mag_rd = 1; ph_rd = 1; end
        @(posedge clk); #1;
        e = isqrt(128'(er[n] * er[n]) + 128'(ei[n] * ei[n]));
        if (!mag_dv || longint'(mag_dout) != e) bad_mag++;
        a = $atan2(real'(ei[n]), real'(er[n])) / (2.0 * 3.14159265358979323846) * 4294967296.0;
        d = longint'(ph_dout) - longint'(a);
        if (d > 64'sd2147483648) d -= 64'sd4294967296;
        if (d < -64'sd2147483648) d += 64'sd4294967296;
        tol = 256.0 + 4294967296.0 / (2.0 * 3.14159265358979323846) * 8.0 / (real'(e) + 1.0);
        if (!ph_dv || real'(d) > tol || real'(d) < -tol) begin
          bad_ph++;
          if (bad_ph < 4) $display("phase lag %0d: got %0d expected %0.0f, magnitude %0d", n, ph_dout, a, e);
        end
      end
      @(negedge clk) begin mag_rd = 0; ph_rd = 0; end
      check(bad_mag == 0, $sformatf("PRI %0d: %0d magnitude mismatches", pri, bad_mag));
      check(bad_ph == 0, $sformatf("PRI %0d: %0d phase mismatches", pri, bad_ph));
      check(mag_empty && ph_empty && !ovf, "FIFOs drained, no overflow");
      // means for the next PRI (rounded toward zero)
      s = 0; foreach (x1i[k]) s += x1i[k]; m1i = s / K;
      s = 0; foreach (x1q[k]) s += x1q[k]; m1q = s / K;
      s = 0; foreach (x2i[k]) s += x2i[k]; m2i = s / D;
      s = 0; foreach (x2q[k]) s += x2q[k]; m2q = s / D;
      check(int'(dut.mean1.i) == m1i && int'(dut.mean1.q) == m1q && int'(dut.mean2.i) == m2i && int'(dut.mean2.q) == m2q,
            "means stored for the next PRI");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
