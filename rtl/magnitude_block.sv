// magnitude_block: |z| = sqrt(re^2 + im^2) of the correlation samples.
//
// Pipeline, one sample per clock:
//   stage 1   re^2 and im^2, 2*IN_W = 84 bits each (registered)
//   stage 2   their sum, 85 bits (registered)
//   stages 3.. integer square root, one result bit per stage, by the
//             digit-by-digit (non-restoring, shift-and-subtract) method:
//             MAG_W = 43 stages, no multipliers.
// `mag` = floor(sqrt(re^2+im^2)) exactly, `out_valid` follows `in_valid`
// after LATENCY = 2 + MAG_W clocks. The squares, their sum and the square
// root follow the source design, as do the 84 and 85 bit widths; the square
// root circuit is this design's choice (the source used a vendor block).
module magnitude_block #(
  parameter int unsigned IN_W  = radar_pkg::ACC_W,
  localparam int unsigned SQ_W  = 2 * IN_W + 1,          // 85: sum of two squares
  localparam int unsigned MAG_W = (SQ_W + 1) / 2,        // 43: its square root
  localparam int unsigned XW    = 2 * MAG_W,             // even working width
  localparam int unsigned LATENCY = 2 + MAG_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] re,
  input  logic signed [IN_W-1:0] im,
  output logic                   out_valid,
  output logic [MAG_W-1:0]       mag
);

  logic [2*IN_W-1:0] sq_re, sq_im;
  logic              v1, v2;
  logic [XW-1:0]     sum;
  // stage s+1 of the square root holds remainder op[s], partial root res[s]
  logic [XW-1:0]     op  [MAG_W];
  logic [XW-1:0]     res [MAG_W];
  logic              v   [MAG_W];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      v2 <= 1'b0;
      sq_re <= '0;
      sq_im <= '0;
      sum   <= '0;
    end else begin
      v1 <= in_valid;
      v2 <= v1;
      sq_re <= (2*IN_W)'(re * re);
      sq_im <= (2*IN_W)'(im * im);
      sum   <= XW'(sq_re) + XW'(sq_im);
    end
  end

  for (genvar s = 0; s < int'(MAG_W); s++) begin : g_sqrt
    localparam logic [XW-1:0] ONE = XW'(1) << (XW - 2 - 2 * s);
    logic [XW-1:0] op_in, res_in;
    logic          v_in;
    if (s == 0) begin : g_first
      always_comb begin
        op_in  = sum;
        res_in = '0;
        v_in   = v2;
      end
    end else begin : g_next
      always_comb begin
        op_in  = op[s-1];
        res_in = res[s-1];
        v_in   = v[s-1];
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        op[s]  <= '0;
        res[s] <= '0;
        v[s]   <= 1'b0;
      end else begin
        v[s] <= v_in;
        if (op_in >= res_in + ONE) begin
          op[s]  <= op_in - (res_in + ONE);
          res[s] <= (res_in >> 1) + ONE;
        end else begin
          op[s]  <= op_in;
          res[s] <= res_in >> 1;
        end
      end
    end
  end

  always_comb begin
    out_valid = v[MAG_W-1];
    mag       = MAG_W'(res[MAG_W-1]);
  end

endmodule
