// tx_rom: read-only memory holding the transmitted chirp.
//
// K = 448 complex samples (3.73 us at 120 MS/s) of a baseband linear
// frequency-modulated pulse sweeping -20 MHz to +20 MHz (40 MHz bandwidth):
//   s[n] = A * exp(j*pi*(B/tau)*t^2),  t = (n - (K-1)/2) / fs,
//   A = 30000, B = 40 MHz, tau = K/fs, fs = 120 MHz,
// each word {I[15:0], Q[15:0]} in two's complement, loaded from
// rtl/tx_chirp.hex. The chirp's instantaneous frequency is centred, so the
// pulse is symmetric in time. Reads are registered: `dout` shows the word
// addressed one clock after `en`; with `en` low `dout` is zero, so the DAC
// is silent outside the pulse. Pulse length, bandwidth and the ROM follow
// the source design; amplitude, centring and the file format are chosen here.
module tx_rom #(
  parameter int unsigned K   = radar_pkg::K,
  localparam int unsigned AW = $clog2(K)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic [AW-1:0]    addr,
  output radar_pkg::cplx_t dout
);

  radar_pkg::cplx_t rom [K];

  initial $readmemh("rtl/tx_chirp.hex", rom);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  dout <= '0;
    else if (en) dout <= rom[addr];
    else         dout <= '0;
  end

endmodule
