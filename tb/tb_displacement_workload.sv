// tb_displacement_workload: the radar's measurement workloads run through the
// whole baseband at its default sizes: a target 30 m away (range bin 24)
// is still for two pulses, then moves in ten steps of 5 mm, one per pulse,
// then vibrates at 12 Hz
// with 1 mm amplitude, sampled by 32 pulses at a 100 Hz pulse rate. The
// RF model turns each range into an echo phase of -4*pi*f0*R/c
// (f0 = 5.755 GHz). The "host" here reads every range profile from the
// FIFOs as it arrives and keeps the phase of bin 24. From the pulse-to-pulse
// phase change it recovers the displacement as dR = -c/(4*pi*f0) * dphi and
// compares it with the true motion (tolerance 0.02 mm).
// The PRI register is set to 40,000 sampling clocks to keep the run short;
// the pulse index stands for the 10 ms pulse time of the real radar.
module tb_displacement_workload;
  localparam int K = 448, D = 3136, NL = D - K + 1;
  localparam int D1 = 2, BIN = 24;                  // loopback delay; 30 m / 1.25 m
  localparam int NSTEP = 10, NVIB = 32, NP = NSTEP + NVIB + 2;
  localparam real PI = 3.14159265358979323846;
  localparam real F0 = 5.755e9, C = 2.99792458e8;

  logic clk_samp = 0, clk_sys = 0, rst_n = 0, enable = 0;
  radar_pkg::cplx_t adc_rx1 = '0, adc_rx2 = '0, dac_tx;
  logic tx_active, mag_rd = 0, ph_rd = 0, mag_dv, ph_dv, mag_empty, ph_empty, ovf, busy;
  logic [63:0] mag_dout, ph_dout;
  logic [12:0] mag_count, ph_count;
  int checks = 0, failures = 0;

  always #4 clk_samp = ~clk_samp;
  always #17 clk_sys = ~clk_sys;

  pulse_radar_top dut (
    .clk_samp, .clk_sys, .rst_n, .enable, .tx_enable(1'b1), .pri_period(32'd40_000),
    .adc_rx1, .adc_rx2, .dac_tx, .tx_active,
    .mag_rd_en(mag_rd), .mag_dout, .mag_dout_valid(mag_dv), .mag_empty, .mag_count,
    .ph_rd_en(ph_rd), .ph_dout, .ph_dout_valid(ph_dv), .ph_empty, .ph_count,
    .fifo_overflow(ovf), .xcorr_busy(busy));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // true displacement of the target at pulse p, in metres
  function automatic real disp(input int p);
    if (p <= 1) return 0.0;
    if (p <= NSTEP + 1) return 0.005 * (p - 1);
    return 0.005 * NSTEP + 0.001 * $sin(2.0 * PI * 12.0 * 0.01 * (p - NSTEP - 1));
  endfunction

  // ---- RF model --------------------------------------------------------
  radar_pkg::cplx_t hist [D1 + BIN + 1];
  int pulse = -1, rot_c = 8192, rot_s = 0;
  always @(posedge tx_active) begin
    real th;
    pulse++;
    th = -4.0 * PI * F0 * disp(pulse) / C;
    rot_c = $rtoi($cos(th) * 8192.0);
    rot_s = $rtoi($sin(th) * 8192.0);
  end
  always @(negedge clk_samp) begin
    radar_pkg::cplx_t e;
    for (int i = D1 + BIN; i > 0; i--) hist[i] = hist[i-1];
    hist[0] = dac_tx;
    adc_rx1.i = hist[D1].i + 16'sd150;
    adc_rx1.q = hist[D1].q - 16'sd90;
    e = hist[D1 + BIN];
    adc_rx2.i = 16'((int'(e.i) * rot_c - int'(e.q) * rot_s) >>> 15) - 16'sd300 + 16'($urandom_range(0, 40)) - 16'sd20;
    adc_rx2.q = 16'((int'(e.i) * rot_s + int'(e.q) * rot_c) >>> 15) + 16'sd220 + 16'($urandom_range(0, 40)) - 16'sd20;
  end

  // ---- host: read both FIFOs continuously, keep the target bin -----------
  int n_mag = 0, n_ph = 0;
  longint bin_ph [NP];
  longint bin_mag [NP];
  int peak_ok = 0;
  longint best = 0; int best_bin = 0;
  always @(negedge clk_sys) begin
    mag_rd <= rst_n && !mag_empty;
    ph_rd  <= rst_n && !ph_empty;
  end
  always @(negedge clk_sys) begin
    if (ph_dv) begin
      if (n_ph % NL == BIN && n_ph / NL < NP) bin_ph[n_ph / NL] = longint'(ph_dout);
      n_ph++;
    end
    if (mag_dv) begin
      if (n_mag % NL == 0) begin best = 0; best_bin = 0; end
      if (longint'(mag_dout) > best) begin best = longint'(mag_dout); best_bin = n_mag % NL; end
      if (n_mag % NL == NL - 1 && best_bin == BIN && n_mag / NL > 0) peak_ok++;
      if (n_mag % NL == BIN && n_mag / NL < NP) bin_mag[n_mag / NL] = longint'(mag_dout);
      n_mag++;
    end
  end

  initial begin
    #(4 * 2 * 40_000 * (NP + 3));
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real dphi, est, tru, worst;
    longint d;
    for (int i = 0; i <= D1 + BIN; i++) hist[i] = '0;
    repeat (4) @(posedge clk_sys);
    rst_n = 1;
    @(negedge clk_samp) enable = 1;
    wait (n_mag >= NP * NL && n_ph >= NP * NL);
    repeat (4) @(posedge clk_sys);
    // the first profile still carries the DC offsets (no earlier PRI to
    // take a mean from), so it is left out of the comparisons
    check(peak_ok == NP - 1, $sformatf("range peak in bin %0d in %0d of %0d profiles", BIN, peak_ok, NP - 1));
    check(!ovf, "no FIFO overflow");
    worst = 0.0;
    for (int p = 2; p < NP; p++) begin
      d = bin_ph[p] - bin_ph[p-1];
      if (d >= 64'sd2147483648) d -= 64'sd4294967296;
      if (d < -64'sd2147483648) d += 64'sd4294967296;
      dphi = real'(d) / 4294967296.0 * 2.0 * PI;
      est = -C / (4.0 * PI * F0) * dphi;
      tru = disp(p) - disp(p - 1);
      if ((est - tru) > worst) worst = est - tru;
      if ((tru - est) > worst) worst = tru - est;
      check((est - tru) < 2.0e-5 && (tru - est) < 2.0e-5,
            $sformatf("pulse %0d: displacement %0.4f mm, true %0.4f mm", p, est * 1e3, tru * 1e3));
    end
    $display("pulse pairs %0d, largest displacement error %0.5f mm", NP - 2, worst * 1e3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
