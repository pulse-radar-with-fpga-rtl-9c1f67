// samp_addr_counter: sampling-clock address counter of the transmit/receive window.
//
// On `start_trig1` (ignored while a window is open) the counter steps the
// sample address 0, 1, ..., RX2_DEPTH-1, one per sampling clock. The same
// address bits drive the TX read-only memory (first K addresses: the chirp
// is sent) and the write ports of the RX1 memory (first K addresses: the
// reference copy of the transmitted pulse) and the RX2 memory (the whole
// receive window), so transmission and reception start together. When the
// last address has been issued, `start_trig2` pulses for one cycle on the
// next clock to hand the stored window to the system clock domain.
// `addr` is valid while `active`; the write enables are combinational
// decodes of the registered address. The shared address and the two
// triggers follow the source design; the one-cycle pulse timing is chosen here.
module samp_addr_counter #(
  parameter int unsigned K         = radar_pkg::K,
  parameter int unsigned RX2_DEPTH = radar_pkg::RX2_DEPTH,
  localparam int unsigned AW       = $clog2(RX2_DEPTH)
) (
  input  logic          clk_samp,
  input  logic          rst_n,
  input  logic          start_trig1,
  output logic [AW-1:0] addr,
  output logic          active,
  output logic          rx1_we,
  output logic          rx2_we,
  output logic          tx_valid,
  output logic          start_trig2
);

  always_ff @(posedge clk_samp or negedge rst_n) begin
    if (!rst_n) begin
      addr        <= '0;
      active      <= 1'b0;
      start_trig2 <= 1'b0;
    end else begin
      start_trig2 <= 1'b0;
      if (!active) begin
        if (start_trig1) begin
          active <= 1'b1;
          addr   <= '0;
        end
      end else if (addr == AW'(RX2_DEPTH - 1)) begin
        active      <= 1'b0;
        start_trig2 <= 1'b1;
      end else begin
        addr <= addr + AW'(1);
      end
    end
  end

  always_comb begin
    tx_valid = active && (int'(addr) < int'(K));
    rx1_we   = tx_valid;
    rx2_we   = active;
  end

endmodule
