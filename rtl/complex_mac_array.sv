// complex_mac_array: the K complex multipliers and the adders of the correlator.
//
// Each clock, stage k of Buffer 1 (conj of reference sample k) is multiplied
// by stage k of Buffer 2 (echo sample n+k) and all K products are summed:
//   out(n) = sum_{k=0}^{K-1} conj(rx1[k]) * rx2[n+k]
// giving one complex cross-correlation sample per clock. A 16x16 complex
// product needs 33 bits per component, and K=448 terms add ceil(log2 448)=9
// more, so the result is 42 bits per component, exact (no rounding, no
// overflow). The sum is formed combinationally in one clock and registered:
// `out_valid` is `in_valid` one clock later. K multipliers working in one
// system clock and the 42-bit result follow the source design (which used
// three DSP slices per complex product); the adder structure is left to
// synthesis.
module complex_mac_array #(
  parameter int unsigned K     = radar_pkg::K,
  parameter int unsigned ACC_W = radar_pkg::ACC_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  radar_pkg::cplx_t        buf1 [K],
  input  radar_pkg::cplx_t        buf2 [K],
  output logic                    out_valid,
  output logic signed [ACC_W-1:0] out_re,
  output logic signed [ACC_W-1:0] out_im
);

  localparam int unsigned PW = 2 * radar_pkg::SAMPLE_W + 1;

  logic signed [ACC_W-1:0] acc_re, acc_im;

  always_comb begin
    logic signed [PW-1:0] p_re, p_im;
    acc_re = '0;
    acc_im = '0;
    for (int k = 0; k < int'(K); k++) begin
      p_re = PW'(buf1[k].i * buf2[k].i) - PW'(buf1[k].q * buf2[k].q);
      p_im = PW'(buf1[k].i * buf2[k].q) + PW'(buf1[k].q * buf2[k].i);
      acc_re = acc_re + ACC_W'(p_re);
      acc_im = acc_im + ACC_W'(p_im);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_re    <= '0;
      out_im    <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_re <= acc_re;
        out_im <= acc_im;
      end
    end
  end

endmodule
