// rx_memory: dual-clock receive memory for complex I/Q samples.
//
// One write port in the sampling clock domain (the "write section", fed by
// the ADC at the shared address counter) and one read port in the system
// clock domain (the "read section", swept by the cross-correlator's
// counters). Reads are registered: `rdata` holds the word addressed one
// `rclk` edge after `re` was high. The write and read sections never touch
// the same PRI's data at the same time, because the read sweep starts only
// after the write window has ended. DEPTH is 448 for RX1 and 3136 for RX2,
// as in the source design; the registered read is this design's choice and
// maps onto block RAM.
module rx_memory #(
  parameter int unsigned DEPTH  = radar_pkg::RX2_DEPTH,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              wclk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  radar_pkg::cplx_t  wdata,
  input  logic              rclk,
  input  logic              re,
  input  logic [AW-1:0]     raddr,
  output radar_pkg::cplx_t  rdata
);

  radar_pkg::cplx_t mem [DEPTH];

  always_ff @(posedge wclk) begin
    if (we && (int'(waddr) < int'(DEPTH))) mem[waddr] <= wdata;
  end

  always_ff @(posedge rclk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
