// rx2_up_counter: the "3136 up counter" that sweeps RX2 memory through Buffer 2.
//
// On `start` (the down counter's end count) it issues RX2 read addresses
// 0, 1, ..., DEPTH-1, one per system clock. `data_valid` rises with address
// K-1: once that sample has reached Buffer 2 the two buffers overlap fully
// for the first time, and every later address yields one more lag of the
// cross-correlation, DEPTH-K+1 lags in all. `done` marks the last address
// and is also the mean computation's end-of-PRI mark. The signals refer to
// the read issue cycle; the cross-correlator delays them to match its
// pipeline. The count of 3136 and the 448-cycle wait for data valid follow
// the source design.
module rx2_up_counter #(
  parameter int unsigned DEPTH = radar_pkg::RX2_DEPTH,
  parameter int unsigned K     = radar_pkg::K,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic [AW-1:0] addr,
  output logic          rd_en,
  output logic          data_valid,
  output logic          done
);

  logic busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      addr <= '0;
    end else if (!busy) begin
      if (start) begin
        busy <= 1'b1;
        addr <= '0;
      end
    end else if (addr == AW'(DEPTH - 1)) begin
      busy <= 1'b0;
    end else begin
      addr <= addr + AW'(1);
    end
  end

  always_comb begin
    rd_en      = busy;
    data_valid = busy && (addr >= AW'(K - 1));
    done       = busy && (addr == AW'(DEPTH - 1));
  end

endmodule
