// phase_block: rectangular-to-polar conversion, phase of the correlation samples.
//
// A pipelined CORDIC in vectoring mode computes atan2(im, re), one sample
// per clock. The first stage folds the left half-plane onto the right one
// (negating both parts and starting the angle at pi); each of the ITER
// following stages rotates the vector by +-atan(2^-i), toward the real axis,
// and adds the rotation to the angle. The angle is a PHASE_W-bit two's
// complement binary angle: 2^PHASE_W is one turn, so -2^(PHASE_W-1) is -pi
// and 2^(PHASE_W-1)-1 is just below +pi. With ITER=30 the error is a few
// LSBs for inputs well above the noise of the shifts (two guard bits are
// kept). `out_valid` follows `in_valid` after LATENCY = 1 + ITER clocks.
// The phase output and a rectangular-to-polar converter follow the source
// design (which used a vendor block); CORDIC, angle format, iteration count
// and widths are this design's choices.
module phase_block #(
  parameter int unsigned IN_W    = radar_pkg::ACC_W,
  parameter int unsigned PHASE_W = 32,
  parameter int unsigned ITER    = 30,
  localparam int unsigned G      = 2,              // guard bits
  localparam int unsigned W      = IN_W + 2 + G,   // sign, CORDIC gain, guard
  localparam int unsigned LATENCY = 1 + ITER
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic signed [IN_W-1:0]    re,
  input  logic signed [IN_W-1:0]    im,
  output logic                      out_valid,
  output logic signed [PHASE_W-1:0] phase
);

  // ATAN[i] = round(atan(2^-i) / (2*pi) * 2^32): angle of stage i in a
  // 32-bit binary angle, rescaled below to PHASE_W bits.
  localparam logic [31:0] ATAN [32] = '{
    32'h20000000,
    32'h12e4051e,
    32'h09fb385b,
    32'h051111d4,
    32'h028b0d43,
    32'h0145d7e1,
    32'h00a2f61e,
    32'h00517c55,
    32'h0028be53,
    32'h00145f2f,
    32'h000a2f98,
    32'h000517cc,
    32'h00028be6,
    32'h000145f3,
    32'h0000a2fa,
    32'h0000517d,
    32'h000028be,
    32'h0000145f,
    32'h00000a30,
    32'h00000518,
    32'h0000028c,
    32'h00000146,
    32'h000000a3,
    32'h00000051,
    32'h00000029,
    32'h00000014,
    32'h0000000a,
    32'h00000005,
    32'h00000003,
    32'h00000001,
    32'h00000001,
    32'h00000000
  };

  function automatic logic [PHASE_W-1:0] atan_step(input int i);
    logic [63:0] a;
    a = {ATAN[i], 32'h0};
    return PHASE_W'(a >> (64 - PHASE_W));
  endfunction

  logic signed [W-1:0]       x0, y0;
  logic        [PHASE_W-1:0] z0;
  logic                      v0;
  logic signed [W-1:0]       x [ITER];
  logic signed [W-1:0]       y [ITER];
  logic        [PHASE_W-1:0] z [ITER];
  logic                      v [ITER];

  // Stage 0: fold the left half-plane.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x0 <= '0;
      y0 <= '0;
      z0 <= '0;
      v0 <= 1'b0;
    end else begin
      v0 <= in_valid;
      if (re < 0) begin
        x0 <= -(W'(re) <<< G);
        y0 <= -(W'(im) <<< G);
        z0 <= {1'b1, {(PHASE_W-1){1'b0}}};
      end else begin
        x0 <= W'(re) <<< G;
        y0 <= W'(im) <<< G;
        z0 <= '0;
      end
    end
  end

  for (genvar i = 0; i < int'(ITER); i++) begin : g_iter
    localparam logic [PHASE_W-1:0] A = atan_step(i);
    logic signed [W-1:0]       xi, yi;
    logic        [PHASE_W-1:0] zi;
    logic                      vi;
    if (i == 0) begin : g_first
      always_comb begin
        xi = x0; yi = y0; zi = z0; vi = v0;
      end
    end else begin : g_next
      always_comb begin
        xi = x[i-1]; yi = y[i-1]; zi = z[i-1]; vi = v[i-1];
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        x[i] <= '0;
        y[i] <= '0;
        z[i] <= '0;
        v[i] <= 1'b0;
      end else begin
        v[i] <= vi;
        if (yi >= 0) begin
          x[i] <= xi + (yi >>> i);
          y[i] <= yi - (xi >>> i);
          z[i] <= zi + A;
        end else begin
          x[i] <= xi - (yi >>> i);
          y[i] <= yi + (xi >>> i);
          z[i] <= zi - A;
        end
      end
    end
  end

  always_comb begin
    out_valid = v[ITER-1];
    phase     = signed'(z[ITER-1]);
  end

endmodule
