// pri_trigger_gen: pulse repetition interval (PRI) trigger, "Start trigger 1".
//
// A free-running counter advances once per sampling clock (120 MHz). While
// `enable` is high it emits a one-cycle `start_trig1` pulse on the first
// clock after enabling and then every `pri_period` clocks, so the pulse
// repetition frequency is f_samp / pri_period (1,200,000 gives the 10 ms PRI
// of the reference configuration). `pri_period` is a register written by the
// host; a new value takes effect when the current interval ends. Values
// below 2 are treated as 2. The pulse is registered. Following the source
// design, the PRI comes from a sampling-clock counter set by the host; the
// counter width and the restart-on-enable behaviour are choices made here.
module pri_trigger_gen #(
  parameter int unsigned CNT_W = 32
) (
  input  logic             clk_samp,
  input  logic             rst_n,
  input  logic             enable,
  input  logic [CNT_W-1:0] pri_period,
  output logic             start_trig1
);

  logic [CNT_W-1:0] cnt;
  logic [CNT_W-1:0] last;

  always_comb last = (pri_period < CNT_W'(2)) ? CNT_W'(1) : pri_period - CNT_W'(1);

  always_ff @(posedge clk_samp or negedge rst_n) begin
    if (!rst_n) begin
      cnt         <= '0;
      start_trig1 <= 1'b0;
    end else if (!enable) begin
      cnt         <= '0;
      start_trig1 <= 1'b0;
    end else begin
      start_trig1 <= (cnt == '0);
      cnt         <= (cnt >= last) ? '0 : cnt + CNT_W'(1);
    end
  end

endmodule
