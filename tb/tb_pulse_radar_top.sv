// tb_pulse_radar_top: end-to-end test of the whole baseband at full size
// (K=448 chirp samples, 3136-sample window, every parameter at its default)
// with the reference 10 ms PRI (1,200,000 sampling clocks).
//
// The RF world is modelled here: RX1 is the DAC output looped back through
// the splitter (2 samples late, plus a DC offset); RX2 is an echo, 1/4 of
// the amplitude, rotated in phase, DLY samples later still, plus DC offset
// and noise. Three PRIs are run: the first with a zero mean, the second with
// the first PRI's means subtracted, the third with the transmitter disabled
// (bistatic mode) and the chirp supplied from outside to both inputs. For
// every PRI the host reads both FIFOs and all 2689 magnitude and phase
// words are compared with a model computed here from the samples actually
// driven (previous-PRI mean removal, conjugate cross-correlation, exact
// square root, atan2), the peak must sit at the echo delay, and the time
// from the end of the receive window to the last result is checked against
// the 121.63 us (3649 system clocks) of the reference design. Each
// mechanism (PRI trigger, clock-domain crossing, mean removal with zero and
// non-zero mean, Buffer 1 freeze, data-valid lags, bistatic mode, host
// reads) is counted and must occur.
module tb_pulse_radar_top;
  localparam int K = 448, D = 3136, NL = D - K + 1;
  localparam int D1 = 2, DLY = 157;               // loopback delay, echo delay
  localparam int PRI = 1_200_000;
  localparam int SYS_HALF = 17;                    // sampling clock half-period is 4

  logic clk_samp = 0, clk_sys = 0, rst_n = 0, enable = 0, tx_enable = 1;
  logic [31:0] pri_period = PRI;
  radar_pkg::cplx_t adc_rx1 = '0, adc_rx2 = '0, dac_tx;
  logic tx_active;
  logic mag_rd = 0, ph_rd = 0, mag_dv, ph_dv, mag_empty, ph_empty, ovf, busy;
  logic [63:0] mag_dout, ph_dout;
  logic [12:0] mag_count, ph_count;
  int checks = 0, failures = 0;

  always #4 clk_samp = ~clk_samp;
  always #(SYS_HALF) clk_sys = ~clk_sys;

  pulse_radar_top dut (
    .clk_samp, .clk_sys, .rst_n, .enable, .tx_enable, .pri_period,
    .adc_rx1, .adc_rx2, .dac_tx, .tx_active,
    .mag_rd_en(mag_rd), .mag_dout, .mag_dout_valid(mag_dv), .mag_empty, .mag_count,
    .ph_rd_en(ph_rd), .ph_dout, .ph_dout_valid(ph_dv), .ph_empty, .ph_count,
    .fifo_overflow(ovf), .xcorr_busy(busy));

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

  // ---- RF model and recording (sampling clock) ---------------------------
  radar_pkg::cplx_t hist [DLY + D1 + 1];
  radar_pkg::cplx_t ext_chirp [K];                // chirp captured for bistatic mode
  int rec1i [K], rec1q [K], rec2i [D], rec2q [D];
  int pri_idx = -1, n_trig1 = 0, n_dac_silent = 0, n_dac_on = 0, ext_pos = 0;
  bit mon = 0;
  localparam int ROT_C = 7094, ROT_S = 4096;      // (cos, sin) of 30 deg times 8192 / 1
  always @(negedge clk_samp) begin
    radar_pkg::cplx_t src, e;
    int ei, eq;
    if (mon && dut.trig1) n_trig1++;
    // what leaves the transmitter (own DAC, or an external one in bistatic mode)
    src = dac_tx;
    if (!tx_enable) begin
      src = (tx_active && ext_pos < K) ? ext_chirp[ext_pos] : '0;
      ext_pos = tx_active ? ext_pos + 1 : 0;
      if (tx_active && dac_tx == '0) n_dac_silent++;
    end else if (tx_active && int'(dut.addr) >= 1 && int'(dut.addr) <= K) begin
      n_dac_on++;
      if (pri_idx == 0) ext_chirp[int'(dut.addr) - 1] = dac_tx;
    end
    for (int i = DLY + D1; i > 0; i--) hist[i] = hist[i-1];
    hist[0] = src;
    adc_rx1.i = 16'(sat(int'(hist[D1].i) + 311));
    adc_rx1.q = 16'(sat(int'(hist[D1].q) - 207));
    e = hist[D1 + DLY];
    ei = (int'(e.i) * ROT_C - int'(e.q) * ROT_S) >>> 15;
    eq = (int'(e.i) * ROT_S + int'(e.q) * ROT_C) >>> 15;
    adc_rx2.i = 16'(sat(ei - 450 + $signed($urandom_range(0, 64)) - 32));
    adc_rx2.q = 16'(sat(eq + 380 + $signed($urandom_range(0, 64)) - 32));
    if (tx_active) begin
      if (int'(dut.addr) < K) begin rec1i[dut.addr] = adc_rx1.i; rec1q[dut.addr] = adc_rx1.q; end
      rec2i[dut.addr] = adc_rx2.i; rec2q[dut.addr] = adc_rx2.q;
    end
  end

  // ---- timing and mechanism monitors (system clock) ----------------------
  realtime t_win_end, t_last_mag;
  int n_trig2 = 0, n_dv = 0, n_freeze = 0, n_mean_nz = 0, sys_cyc = 0, c_trig2 = 0, c_last = 0;
  bit s1v_prev = 0;
  radar_pkg::cplx_t b1_prev [K];
  always @(posedge clk_samp) if (mon && dut.trig2_samp) t_win_end = $realtime;
  always @(posedge clk_sys) begin
    sys_cyc <= sys_cyc + 1;
    if (mon) begin
      if (dut.trig2_sys) begin n_trig2++; c_trig2 <= sys_cyc; end
      if (dut.u_xcorr.xc_valid) n_dv++;
      if (dut.u_xcorr.mag_v) begin t_last_mag = $realtime; c_last <= sys_cyc; end
      if (dut.u_xcorr.s2_v && !dut.u_xcorr.s1_v && !s1v_prev) begin
        bit same = 1;
        for (int k = 0; k < K; k++) if (dut.u_xcorr.buf1[k] != b1_prev[k]) same = 0;
        if (same) n_freeze++;
      end
      if (dut.u_xcorr.v2_d1 && dut.u_xcorr.mean2 != '0) n_mean_nz++;
    end
    s1v_prev <= dut.u_xcorr.s1_v;
    for (int k = 0; k < K; k++) b1_prev[k] <= dut.u_xcorr.buf1[k];
  end

  initial begin
    #(4 * 8 * 4_000_000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int m1i = 0, m1q = 0, m2i = 0, m2q = 0, s;
    int c1i [K], c1q [K], c2i [D], c2q [D];
    longint er [NL], ei [NL];
    longint e, d, best;
    real a, us, tol;
    int bad_mag, bad_ph, bn, n_reads = 0;
    for (int i = 0; i <= DLY + D1; i++) hist[i] = '0;
    repeat (4) @(posedge clk_sys);
    rst_n = 1;
    @(posedge clk_sys) mon = 1;
    @(negedge clk_samp) enable = 1;
    for (int p = 0; p < 3; p++) begin
      // wait for the receive window of this PRI, then for the results
      @(posedge tx_active);
      pri_idx = p;
      @(negedge tx_active);
      wait (mag_count == 13'(NL) && ph_count == 13'(NL) && !busy);
      repeat (2) @(posedge clk_sys);
      // the model, from what was driven
      for (int k = 0; k < K; k++) begin c1i[k] = sat(rec1i[k] - m1i); c1q[k] = sat(-sat(rec1q[k] - m1q)); end
      for (int x = 0; x < D; x++) begin c2i[x] = sat(rec2i[x] - m2i); c2q[x] = sat(rec2q[x] - m2q); end
      for (int n = 0; n < NL; n++) begin
        er[n] = 0; ei[n] = 0;
        for (int k = 0; k < K; k++) begin
          er[n] += longint'(c1i[k]) * c2i[n + k] - longint'(c1q[k]) * c2q[n + k];
          ei[n] += longint'(c1i[k]) * c2q[n + k] + longint'(c1q[k]) * c2i[n + k];
        end
      end
      // host transfer: read both FIFOs
      bad_mag = 0; bad_ph = 0; best = -1; bn = -1;
      for (int n = 0; n < NL; n++) begin
        @(negedge clk_sys) begin mag_rd = 1; ph_rd = 1; end
        @(posedge clk_sys); #1;
        n_reads++;
        e = isqrt(128'(er[n] * er[n]) + 128'(ei[n] * ei[n]));
        if (!mag_dv || longint'(mag_dout) != e) bad_mag++;
        if (longint'(mag_dout) > best) begin best = longint'(mag_dout); bn = n; end
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
      @(negedge clk_sys) begin mag_rd = 0; ph_rd = 0; end
      check(bad_mag == 0, $sformatf("PRI %0d: %0d magnitude mismatches", p, bad_mag));
      check(bad_ph == 0, $sformatf("PRI %0d: %0d phase mismatches", p, bad_ph));
      check(bn == DLY, $sformatf("PRI %0d: range peak at bin %0d, expected %0d", p, bn, DLY));
      check(mag_empty && ph_empty && !ovf, "FIFOs drained without overflow");
      us = (t_last_mag - t_win_end) / (2.0 * SYS_HALF);
      $display("PRI %0d: end of window to last result %0.1f system clocks (reference design 3649), peak %0d",
               p, us, best);
      check(c_last - c_trig2 == K + D + 49, $sformatf("Start trigger 2 to last result %0d clocks", c_last - c_trig2));
      check(us <= 3649.0 && us >= real'(K + D), "computation time within the reference 121.63 us");
      // the means this PRI leaves for the next one
      s = 0; foreach (rec1i[k]) s += rec1i[k]; m1i = s / K;
      s = 0; foreach (rec1q[k]) s += rec1q[k]; m1q = s / K;
      s = 0; foreach (rec2i[k]) s += rec2i[k]; m2i = s / D;
      s = 0; foreach (rec2q[k]) s += rec2q[k]; m2q = s / D;
      if (p == 1) @(negedge clk_samp) tx_enable = 0;   // third PRI: bistatic
    end
    check(n_trig1 >= 3, $sformatf("PRI triggers %0d", n_trig1));
    check(n_trig2 == 3, $sformatf("Start trigger 2 crossings %0d", n_trig2));
    check(n_dv == 3 * NL, $sformatf("data-valid lags %0d", n_dv));
    check(n_freeze == 3 * (D - 1), $sformatf("Buffer 1 frozen for %0d RX2 shifts", n_freeze));
    check(n_mean_nz == 2 * D, $sformatf("samples with a non-zero mean removed %0d", n_mean_nz));
    check(n_dac_on == 2 * K, $sformatf("DAC chirp samples %0d", n_dac_on));
    check(n_dac_silent == D, $sformatf("DAC silent in bistatic mode %0d", n_dac_silent));
    check(n_reads == 3 * NL, "host reads");
    $display("mechanisms: trig1=%0d trig2=%0d lags=%0d freeze=%0d mean_nz=%0d dac_on=%0d bistatic_silent=%0d reads=%0d",
             n_trig1, n_trig2, n_dv, n_freeze, n_mean_nz, n_dac_on, n_dac_silent, n_reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
