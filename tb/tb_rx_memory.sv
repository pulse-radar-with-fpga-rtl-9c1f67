// tb_rx_memory: writes random samples with a 120 MHz clock, reads them back
// with an unrelated 30 MHz clock and checks every word and the one-clock
// read latency, at both RX1 (448) and RX2 (3136) depths.
module tb_rx_memory;
  logic wclk = 0, rclk = 0;
  int checks = 0, failures = 0;

  always #4.167 wclk = ~wclk;
  always #16.667 rclk = ~rclk;

  logic             we1, re1, we2, re2;
  logic [8:0]       wa1, ra1;
  logic [11:0]      wa2, ra2;
  radar_pkg::cplx_t wd1, rd1, wd2, rd2;
  radar_pkg::cplx_t ref1 [448];
  radar_pkg::cplx_t ref2 [3136];

  rx_memory #(.DEPTH(448))  u1 (.wclk, .we(we1), .waddr(wa1), .wdata(wd1), .rclk, .re(re1), .raddr(ra1), .rdata(rd1));
  rx_memory                 u2 (.wclk, .we(we2), .waddr(wa2), .wdata(wd2), .rclk, .re(re2), .raddr(ra2), .rdata(rd2));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge rclk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int bad1 = 0, bad2 = 0;
    {we1, we2, re1, re2} = '0;
    wa1 = '0; wa2 = '0; ra1 = '0; ra2 = '0; wd1 = '0; wd2 = '0;
    for (int a = 0; a < 3136; a++) begin
      @(negedge wclk);
      wd2 = radar_pkg::cplx_t'($urandom); wa2 = 12'(a); we2 = 1; ref2[a] = wd2;
      if (a < 448) begin wd1 = radar_pkg::cplx_t'($urandom); wa1 = 9'(a); we1 = 1; ref1[a] = wd1; end
      else we1 = 0;
    end
    @(negedge wclk) begin we1 = 0; we2 = 0; end
    for (int a = 3135; a >= 0; a--) begin
      @(negedge rclk) begin re2 = 1; ra2 = 12'(a); re1 = (a < 448); ra1 = 9'(a % 448); end
      @(posedge rclk); #1;
      if (rd2 != ref2[a]) bad2++;
      if (a < 448 && rd1 != ref1[a]) bad1++;
      @(negedge rclk) begin re1 = 0; re2 = 0; end
      @(posedge rclk); #1;
      if (rd2 != ref2[a]) bad2++;                // holds without re
    end
    check(bad1 == 0, $sformatf("RX1 mismatches %0d", bad1));
    check(bad2 == 0, $sformatf("RX2 mismatches %0d", bad2));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
