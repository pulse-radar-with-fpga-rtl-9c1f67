// output_fifo: synchronous FIFO carrying result words toward the host.
//
// Two instances send the range profile out, one for magnitudes and one for
// phases, 64-bit words. Write: `din` is stored on a clock with `wr_en` and
// not `full`; a write while full is dropped and sets the sticky `overflow`
// flag (cleared by reset). Read: on a clock with `rd_en` and not `empty`
// the oldest word is removed and appears on `dout` after that clock edge
// (`dout_valid` marks it). `count` is the number of words held. DEPTH
// defaults to 4096 so that one whole range profile (2689 words) fits even
// when the host starts reading only after the computation, as in the
// source design's timing; the depth and the handshake are this design's
// choices, the two FIFOs and the 64-bit words are the source's.
module output_fifo #(
  parameter int unsigned W     = radar_pkg::HOST_W,
  parameter int unsigned DEPTH = 4096,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_en,
  input  logic [W-1:0] din,
  input  logic         rd_en,
  output logic [W-1:0] dout,
  output logic         dout_valid,
  output logic         empty,
  output logic         full,
  output logic [AW:0]  count,
  output logic         overflow
);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic          do_wr, do_rd;

  always_comb begin
    empty = (count == '0);
    full  = (count == (AW+1)'(DEPTH));
    do_wr = wr_en && !full;
    do_rd = rd_en && !empty;
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= din;
    if (do_rd) dout <= mem[rptr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr       <= '0;
      rptr       <= '0;
      count      <= '0;
      overflow   <= 1'b0;
      dout_valid <= 1'b0;
    end else begin
      dout_valid <= do_rd;
      if (do_wr) wptr <= (wptr == AW'(DEPTH - 1)) ? '0 : wptr + AW'(1);
      if (do_rd) rptr <= (rptr == AW'(DEPTH - 1)) ? '0 : rptr + AW'(1);
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
      if (wr_en && full) overflow <= 1'b1;
    end
  end

  // The fill level can never pass the depth.
  a_count_bound: assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));

endmodule
