// pulse_sync: carries a one-cycle pulse between two unrelated clocks.
//
// Used for "Start trigger 2", the only control signal that links the
// sampling clock domain to the system clock domain. Each source pulse flips
// a toggle flop; the toggle crosses through a two-flop synchroniser and an
// edge detector turns each change into one destination-clock pulse, 3 to 4
// destination clocks later. Source pulses must be further apart than about
// three destination clocks (here they are a whole PRI apart). The
// synchroniser circuit is this design's choice; the source design only
// names the signal.
module pulse_sync (
  input  logic clk_src,
  input  logic clk_dst,
  input  logic rst_n,
  input  logic pulse_src,
  output logic pulse_dst
);

  logic       toggle_src;
  logic [2:0] sync_dst;

  always_ff @(posedge clk_src or negedge rst_n) begin
    if (!rst_n)         toggle_src <= 1'b0;
    else if (pulse_src) toggle_src <= ~toggle_src;
  end

  always_ff @(posedge clk_dst or negedge rst_n) begin
    if (!rst_n) begin
      sync_dst  <= '0;
      pulse_dst <= 1'b0;
    end else begin
      sync_dst  <= {sync_dst[1:0], toggle_src};
      pulse_dst <= sync_dst[2] ^ sync_dst[1];
    end
  end

endmodule
