// tb_complex_mac_array: full-size (K=448) multiply-add array. Random and
// extreme buffer contents; the expected sum of conj-weighted products is
// computed here with 64-bit integers. Checks the one-clock latency, that
// a result is held while in_valid is low, and the all -32768 corner that
// needs the full 42 bits.
module tb_complex_mac_array;
  localparam int K = 448;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  radar_pkg::cplx_t b1 [K];
  radar_pkg::cplx_t b2 [K];
  logic signed [41:0] re, im;
  int checks = 0, failures = 0;

  complex_mac_array dut (.clk, .rst_n, .in_valid, .buf1(b1), .buf2(b2), .out_valid, .out_re(re), .out_im(im));

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
    longint er, ei;
    for (int k = 0; k < K; k++) begin b1[k] = '0; b2[k] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      @(negedge clk);
      for (int k = 0; k < K; k++) begin
        b1[k] = radar_pkg::cplx_t'($urandom);
        b2[k] = radar_pkg::cplx_t'($urandom);
        if (t == 0) begin b1[k] = '{16'sh8000, 16'sh8000}; b2[k] = '{16'sh8000, 16'sh7fff}; end
        if (t == 1) begin b1[k] = '{16'sh8000, 16'sh8000}; b2[k] = '{16'sh8000, 16'sh8000}; end
      end
      er = 0; ei = 0;
      for (int k = 0; k < K; k++) begin
        er += longint'(b1[k].i) * longint'(b2[k].i) - longint'(b1[k].q) * longint'(b2[k].q);
        ei += longint'(b1[k].i) * longint'(b2[k].q) + longint'(b1[k].q) * longint'(b2[k].i);
      end
      in_valid = 1;
      @(posedge clk); #1;
      check(out_valid && longint'(re) == er && longint'(im) == ei,
            $sformatf("t=%0d got %0d,%0d expected %0d,%0d", t, re, im, er, ei));
      @(negedge clk) begin in_valid = 0; b1[0] = ~b1[0]; end
      @(posedge clk); #1;
      check(!out_valid && longint'(re) == er, "held while not valid");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
