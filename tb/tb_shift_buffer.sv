// tb_shift_buffer: drives random samples into a right-shifting conjugating
// buffer (Buffer 1 style) and a left-shifting plain buffer (Buffer 2
// style) with random shift enables, and compares all stages with queue
// models after every clock; includes the -32768 conjugation corner.
module tb_shift_buffer;
  localparam int K = 448;
  logic clk = 0, rst_n = 0, en = 0;
  radar_pkg::cplx_t din = '0;
  radar_pkg::cplx_t t1 [K];
  radar_pkg::cplx_t t2 [K];
  radar_pkg::cplx_t m1 [K];
  radar_pkg::cplx_t m2 [K];
  int checks = 0, failures = 0;

  shift_buffer #(.CONJ(1'b1), .SHIFT_RIGHT(1'b1)) u1 (.clk, .rst_n, .shift_en(en), .din, .taps(t1));
  shift_buffer #(.CONJ(1'b0), .SHIFT_RIGHT(1'b0)) u2 (.clk, .rst_n, .shift_en(en), .din, .taps(t2));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int bad = 0;
    radar_pkg::cplx_t c;
    for (int k = 0; k < K; k++) begin m1[k] = '0; m2[k] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1200; n++) begin
      @(negedge clk) begin
        en  = (n < 500) || ($urandom_range(0, 3) != 0);
        din = radar_pkg::cplx_t'($urandom);
        if (n == 3) din.q = 16'sh8000;
      end
      if (en) begin
        c = din;
        c.q = (din.q == 16'sh8000) ? 16'sh7fff : -din.q;
        for (int k = K - 1; k > 0; k--) m1[k] = m1[k-1];
        m1[0] = c;
        for (int k = 0; k < K - 1; k++) m2[k] = m2[k+1];
        m2[K-1] = din;
      end
      @(posedge clk); #1;
      for (int k = 0; k < K; k++) if (t1[k] != m1[k] || t2[k] != m2[k]) bad++;
      if (n % 100 == 99) begin
        check(bad == 0, $sformatf("stage mismatches up to step %0d: %0d", n, bad));
        bad = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
