// pulse_radar_top: FPGA baseband of a pulse radar with real-time range compression.
//
// Two clock domains. Sampling domain (clk_samp, 120 MHz): every PRI the
// trigger generator starts the address counter, which plays the chirp from
// the TX ROM to the DAC (first K addresses, unless `tx_enable` is low) and
// writes both ADC streams into the RX1 (first K samples: the reference copy
// of the transmitted pulse) and RX2 (RX2_DEPTH samples: the echo window)
// memories. System domain (clk_sys, 30 MHz): Start trigger 2, carried
// across by a pulse synchroniser, starts the cross-correlator, which reads
// both memories and delivers magnitude and phase of each range bin into two
// FIFOs read by the host.
//
// Ports: ADC samples are written in the clock where the counter holds their
// address (`tx_active` high); DAC samples appear one clock after their
// address. `pri_period` (sampling clocks per PRI, 1,200,000 for 10 ms) and
// `tx_enable` come from host registers; `tx_enable` low turns the design
// into a receive-only (bistatic) radar with RX1 fed by an external
// transmitter. One asynchronous active-low reset, assumed released
// synchronously to both clocks, serves both domains. The host reads the two
// FIFOs with rd_en/dout (data one clock after rd_en). A new PRI must not
// start its receive window while the correlator still reads the memories;
// at the default sizes the correlator needs about 122 us of a 10 ms PRI.
module pulse_radar_top #(
  parameter int unsigned K          = radar_pkg::K,
  parameter int unsigned RX2_DEPTH  = radar_pkg::RX2_DEPTH,
  parameter int unsigned FIFO_DEPTH = 4096,
  localparam int unsigned HW  = radar_pkg::HOST_W,
  localparam int unsigned FAW = $clog2(FIFO_DEPTH)
) (
  input  logic             clk_samp,
  input  logic             clk_sys,
  input  logic             rst_n,
  // host registers
  input  logic             enable,
  input  logic             tx_enable,
  input  logic [31:0]      pri_period,
  // converters (sampling domain)
  input  radar_pkg::cplx_t adc_rx1,
  input  radar_pkg::cplx_t adc_rx2,
  output radar_pkg::cplx_t dac_tx,
  output logic             tx_active,
  // host transfer (system domain)
  input  logic             mag_rd_en,
  output logic [HW-1:0]    mag_dout,
  output logic             mag_dout_valid,
  output logic             mag_empty,
  output logic [FAW:0]     mag_count,
  input  logic             ph_rd_en,
  output logic [HW-1:0]    ph_dout,
  output logic             ph_dout_valid,
  output logic             ph_empty,
  output logic [FAW:0]     ph_count,
  output logic             fifo_overflow,
  output logic             xcorr_busy
);

  localparam int unsigned A1W = $clog2(K);
  localparam int unsigned A2W = $clog2(RX2_DEPTH);

  // ---- sampling clock domain -------------------------------------------
  logic           trig1, trig2_samp, trig2_sys;
  logic [A2W-1:0] addr;
  logic           rx1_we, rx2_we, tx_valid;

  pri_trigger_gen #(.CNT_W(32)) u_pri (
    .clk_samp, .rst_n, .enable, .pri_period, .start_trig1(trig1)
  );

  samp_addr_counter #(.K(K), .RX2_DEPTH(RX2_DEPTH)) u_addr (
    .clk_samp, .rst_n, .start_trig1(trig1), .addr, .active(tx_active),
    .rx1_we, .rx2_we, .tx_valid, .start_trig2(trig2_samp)
  );

  tx_rom #(.K(K)) u_tx_rom (
    .clk(clk_samp), .rst_n, .en(tx_valid && tx_enable), .addr(A1W'(addr)), .dout(dac_tx)
  );

  // ---- RX memories (write: sampling clock, read: system clock) ---------
  logic [A1W-1:0]   rx1_raddr;
  logic [A2W-1:0]   rx2_raddr;
  logic             rx1_re, rx2_re;
  radar_pkg::cplx_t rx1_rdata, rx2_rdata;

  rx_memory #(.DEPTH(K)) u_rx1_mem (
    .wclk(clk_samp), .we(rx1_we), .waddr(A1W'(addr)), .wdata(adc_rx1),
    .rclk(clk_sys), .re(rx1_re), .raddr(rx1_raddr), .rdata(rx1_rdata)
  );

  rx_memory #(.DEPTH(RX2_DEPTH)) u_rx2_mem (
    .wclk(clk_samp), .we(rx2_we), .waddr(addr), .wdata(adc_rx2),
    .rclk(clk_sys), .re(rx2_re), .raddr(rx2_raddr), .rdata(rx2_rdata)
  );

  // ---- Start trigger 2 into the system clock domain --------------------
  pulse_sync u_trig2_sync (
    .clk_src(clk_samp), .clk_dst(clk_sys), .rst_n,
    .pulse_src(trig2_samp), .pulse_dst(trig2_sys)
  );

  // ---- system clock domain ---------------------------------------------
  xcorr_block #(.K(K), .RX2_DEPTH(RX2_DEPTH), .FIFO_DEPTH(FIFO_DEPTH)) u_xcorr (
    .clk(clk_sys), .rst_n, .start(trig2_sys), .busy(xcorr_busy),
    .rx1_raddr, .rx1_re, .rx1_rdata,
    .rx2_raddr, .rx2_re, .rx2_rdata,
    .mag_rd_en, .mag_dout, .mag_dout_valid, .mag_empty, .mag_count,
    .ph_rd_en, .ph_dout, .ph_dout_valid, .ph_empty, .ph_count,
    .fifo_overflow
  );

endmodule
