// shift_buffer: K-stage complex shift register with all stages in parallel.
//
// The cross-correlator needs K samples of each signal at once, so each RX
// memory is dumped into a chain of flip-flops ("Buffer 1" for the reference
// RX1, "Buffer 2" for the echo RX2), 16 bits per I and Q. On a clock with
// `shift_en` the chain moves by one stage and `din` enters at one end;
// without it the chain holds, which is how Buffer 1 is frozen once filled.
// SHIFT_RIGHT=1: `din` enters stage 0 and data moves toward stage K-1
// (Buffer 1). SHIFT_RIGHT=0: `din` enters stage K-1 and moves toward 0
// (Buffer 2). CONJ=1 negates Q on entry (saturating -32768 to 32767), which
// stores the complex conjugate (Buffer 1). Buffers of flip-flops, the right
// shift of Buffer 1, its freeze and the Q negation follow the source
// design; Buffer 2's direction is chosen here so that stage k of both
// buffers pairs RX1 sample k with RX2 sample n+k (a true cross-correlation).
module shift_buffer #(
  parameter int unsigned K           = radar_pkg::K,
  parameter bit          CONJ        = 1'b0,
  parameter bit          SHIFT_RIGHT = 1'b1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             shift_en,
  input  radar_pkg::cplx_t din,
  output radar_pkg::cplx_t taps [K]
);

  radar_pkg::cplx_t d;

  always_comb begin
    d = din;
    if (CONJ) d.q = radar_pkg::sat16(-17'(din.q));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(K); k++) taps[k] <= '0;
    end else if (shift_en) begin
      if (SHIFT_RIGHT) begin
        taps[0] <= d;
        for (int k = 1; k < int'(K); k++) taps[k] <= taps[k-1];
      end else begin
        taps[K-1] <= d;
        for (int k = 0; k < int'(K) - 1; k++) taps[k] <= taps[k+1];
      end
    end
  end

endmodule
