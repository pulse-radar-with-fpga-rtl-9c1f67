// rx1_down_counter: the "448 down counter" that dumps RX1 memory into Buffer 1.
//
// On `start` (Start trigger 2, ignored while busy) it issues RX1 read
// addresses K-1, K-2, ..., 0, one per system clock, with `rd_en` high for
// exactly K cycles. Reading the reference pulse backwards while Buffer 1
// shifts right leaves sample k in buffer stage k. `end_count` is high in the
// cycle that issues address 0; it starts the RX2 up counter and marks the
// last sample of the PRI for the mean computation. Outputs are decoded from
// registered state. The down-counting order and the end-count hand-over are
// from the source design.
module rx1_down_counter #(
  parameter int unsigned K  = radar_pkg::K,
  localparam int unsigned AW = $clog2(K)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic [AW-1:0] addr,
  output logic          rd_en,
  output logic          end_count
);

  logic busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      addr <= '0;
    end else if (!busy) begin
      if (start) begin
        busy <= 1'b1;
        addr <= AW'(K - 1);
      end
    end else if (addr == '0) begin
      busy <= 1'b0;
    end else begin
      addr <= addr - AW'(1);
    end
  end

  always_comb begin
    rd_en     = busy;
    end_count = busy && (addr == '0);
  end

endmodule
