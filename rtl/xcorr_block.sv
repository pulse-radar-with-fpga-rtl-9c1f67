// xcorr_block: system-clock side of the radar, the cross-correlator.
//
// After each receive window the stored reference pulse (RX1, K samples) and
// echo (RX2, RX2_DEPTH samples) are range-compressed by time-domain
// cross-correlation:
//   xc(n) = sum_{k=0}^{K-1} conj(rx1[k]) * rx2[n+k],  n = 0 .. RX2_DEPTH-K
// and the magnitude and phase of every lag n are queued for the host.
//
// Sequence, started by `start` (Start trigger 2, ignored while `busy`):
//   1. the down counter reads RX1 addresses K-1..0 (K clocks); each sample,
//      minus the previous PRI's mean, is conjugated into Buffer 1, which
//      then stops shifting and holds the reference;
//   2. its end count starts the up counter, which reads RX2 addresses
//      0..RX2_DEPTH-1 into Buffer 2 (RX2_DEPTH clocks), also mean-corrected;
//   3. from the K-th RX2 sample on, the K complex multipliers and adders
//      give one correlation lag per clock (RX2_DEPTH-K+1 lags), whose
//      magnitude and phase go into the two output FIFOs.
// Pipeline from read issue: memory read 1, mean removal 1, buffer 1,
// multiply-add 1, then the magnitude (2+43) or phase (1+ITER) pipeline.
// The RX memories sit outside (they are written in the sampling domain);
// this block drives their read ports, and their read data returns one clock
// after the read enable. The block structure, counts and widths follow the
// source design; pipeline registers, the busy rule and the FIFO handshake
// are this design's choices.
module xcorr_block #(
  parameter int unsigned K          = radar_pkg::K,
  parameter int unsigned RX2_DEPTH  = radar_pkg::RX2_DEPTH,
  parameter int unsigned FIFO_DEPTH = 4096,
  localparam int unsigned A1W = $clog2(K),
  localparam int unsigned A2W = $clog2(RX2_DEPTH),
  localparam int unsigned HW  = radar_pkg::HOST_W,
  localparam int unsigned FAW = $clog2(FIFO_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  // RX1 memory read section
  output logic [A1W-1:0]    rx1_raddr,
  output logic              rx1_re,
  input  radar_pkg::cplx_t  rx1_rdata,
  // RX2 memory read section
  output logic [A2W-1:0]    rx2_raddr,
  output logic              rx2_re,
  input  radar_pkg::cplx_t  rx2_rdata,
  // magnitude FIFO, host side
  input  logic              mag_rd_en,
  output logic [HW-1:0]     mag_dout,
  output logic              mag_dout_valid,
  output logic              mag_empty,
  output logic [FAW:0]      mag_count,
  // phase FIFO, host side
  input  logic              ph_rd_en,
  output logic [HW-1:0]     ph_dout,
  output logic              ph_dout_valid,
  output logic              ph_empty,
  output logic [FAW:0]      ph_count,
  output logic              fifo_overflow
);

  import radar_pkg::*;

  // ---- counters --------------------------------------------------------
  logic dc_end, uc_dv, uc_done, start_ok;

  always_comb begin
    busy     = rx1_re || rx2_re;
    start_ok = start && !busy;
  end

  rx1_down_counter #(.K(K)) u_down (
    .clk, .rst_n, .start(start_ok),
    .addr(rx1_raddr), .rd_en(rx1_re), .end_count(dc_end)
  );

  rx2_up_counter #(.DEPTH(RX2_DEPTH), .K(K)) u_up (
    .clk, .rst_n, .start(dc_end),
    .addr(rx2_raddr), .rd_en(rx2_re), .data_valid(uc_dv), .done(uc_done)
  );

  // ---- memory read latency --------------------------------------------
  logic v1_d1, last1_d1, v2_d1, last2_d1, dv_d1, dv_d2, dv_d3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {v1_d1, last1_d1, v2_d1, last2_d1, dv_d1, dv_d2, dv_d3} <= '0;
    end else begin
      v1_d1    <= rx1_re;
      last1_d1 <= dc_end;
      v2_d1    <= rx2_re;
      last2_d1 <= uc_done;
      dv_d1    <= uc_dv;
      dv_d2    <= dv_d1;
      dv_d3    <= dv_d2;
    end
  end

  // ---- mean removal ----------------------------------------------------
  cplx_t s1, s2, mean1, mean2;
  logic  s1_v, s2_v;

  mean_remover #(.N(K)) u_mean1 (
    .clk, .rst_n, .in_valid(v1_d1), .in_last(last1_d1), .in_data(rx1_rdata),
    .out_valid(s1_v), .out_data(s1), .mean(mean1)
  );

  mean_remover #(.N(RX2_DEPTH)) u_mean2 (
    .clk, .rst_n, .in_valid(v2_d1), .in_last(last2_d1), .in_data(rx2_rdata),
    .out_valid(s2_v), .out_data(s2), .mean(mean2)
  );

  // ---- buffers ---------------------------------------------------------
  cplx_t buf1 [K];
  cplx_t buf2 [K];

  shift_buffer #(.K(K), .CONJ(1'b1), .SHIFT_RIGHT(1'b1)) u_buf1 (
    .clk, .rst_n, .shift_en(s1_v), .din(s1), .taps(buf1)
  );

  shift_buffer #(.K(K), .CONJ(1'b0), .SHIFT_RIGHT(1'b0)) u_buf2 (
    .clk, .rst_n, .shift_en(s2_v), .din(s2), .taps(buf2)
  );

  // ---- complex multipliers and adders ----------------------------------
  logic                    xc_valid;
  logic signed [ACC_W-1:0] xc_re, xc_im;

  complex_mac_array #(.K(K), .ACC_W(ACC_W)) u_mac (
    .clk, .rst_n, .in_valid(dv_d3), .buf1, .buf2,
    .out_valid(xc_valid), .out_re(xc_re), .out_im(xc_im)
  );

  // ---- magnitude and phase ---------------------------------------------
  localparam int unsigned MAG_W = ACC_W + 1;
  logic             mag_v, ph_v;
  logic [MAG_W-1:0] mag;
  logic signed [31:0] phase;

  magnitude_block #(.IN_W(ACC_W)) u_mag (
    .clk, .rst_n, .in_valid(xc_valid), .re(xc_re), .im(xc_im),
    .out_valid(mag_v), .mag
  );

  phase_block #(.IN_W(ACC_W), .PHASE_W(32)) u_phase (
    .clk, .rst_n, .in_valid(xc_valid), .re(xc_re), .im(xc_im),
    .out_valid(ph_v), .phase
  );

  // ---- FIFOs to the host -----------------------------------------------
  logic mag_full, ph_full, mag_ovf, ph_ovf;

  output_fifo #(.W(HW), .DEPTH(FIFO_DEPTH)) u_mag_fifo (
    .clk, .rst_n, .wr_en(mag_v), .din(HW'(mag)), .rd_en(mag_rd_en),
    .dout(mag_dout), .dout_valid(mag_dout_valid), .empty(mag_empty), .full(mag_full),
    .count(mag_count), .overflow(mag_ovf)
  );

  output_fifo #(.W(HW), .DEPTH(FIFO_DEPTH)) u_ph_fifo (
    .clk, .rst_n, .wr_en(ph_v), .din(HW'(phase)), .rd_en(ph_rd_en),
    .dout(ph_dout), .dout_valid(ph_dout_valid), .empty(ph_empty), .full(ph_full),
    .count(ph_count), .overflow(ph_ovf)
  );

  always_comb fifo_overflow = mag_ovf || ph_ovf;

endmodule
