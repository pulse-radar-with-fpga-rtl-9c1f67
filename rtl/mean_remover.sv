// mean_remover: DC-offset removal for one RX channel (I and Q together).
//
// Every sample read from an RX memory passes through here on its way to a
// buffer. The output is the input minus the mean of the previous PRI,
// saturated to 16 bits and registered (one cycle of latency, `out_valid`
// follows `in_valid`). In parallel the raw samples of the current PRI are
// summed; on the sample flagged `in_last` the sum is divided by N (the
// number of samples per PRI: 448 for RX1, 3136 for RX2) and the quotient
// becomes the mean for the next PRI. After reset the mean is zero, so the
// first PRI passes unchanged. The mean-of-previous-PRI scheme follows the
// source design; the divider there is a vendor block, here it is a plain
// signed division by the constant N (rounding toward zero), and the
// saturation on subtraction is this design's choice.
module mean_remover #(
  parameter int unsigned N      = radar_pkg::RX2_DEPTH,
  localparam int unsigned SW    = radar_pkg::SAMPLE_W,
  localparam int unsigned SUM_W = SW + $clog2(N) + 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             in_last,
  input  radar_pkg::cplx_t in_data,
  output logic             out_valid,
  output radar_pkg::cplx_t out_data,
  output radar_pkg::cplx_t mean        // mean now being subtracted
);

  localparam logic signed [SUM_W-1:0] NS = SUM_W'(N);

  logic signed [SUM_W-1:0] sum_i, sum_q, nxt_i, nxt_q;

  always_comb begin
    nxt_i = sum_i + SUM_W'(in_data.i);
    nxt_q = sum_q + SUM_W'(in_data.q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_i     <= '0;
      sum_q     <= '0;
      mean      <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_data.i <= radar_pkg::sat16(17'(in_data.i) - 17'(mean.i));
        out_data.q <= radar_pkg::sat16(17'(in_data.q) - 17'(mean.q));
        if (in_last) begin
          mean.i <= SW'(nxt_i / NS);
          mean.q <= SW'(nxt_q / NS);
          sum_i  <= '0;
          sum_q  <= '0;
        end else begin
          sum_i <= nxt_i;
          sum_q <= nxt_q;
        end
      end
    end
  end

endmodule
