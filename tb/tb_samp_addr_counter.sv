// tb_samp_addr_counter: checks the address sweep, the write enables of the
// two RX memories, the TX window, Start trigger 2 and that a trigger during
// an open window is ignored, at the full sizes (K=448, 3136 samples).
module tb_samp_addr_counter;
  localparam int K = 448, D = 3136;
  logic clk = 0, rst_n = 0, trig1 = 0;
  logic [11:0] addr;
  logic active, rx1_we, rx2_we, tx_valid, trig2;
  int checks = 0, failures = 0;

  samp_addr_counter dut (.clk_samp(clk), .rst_n, .start_trig1(trig1), .addr, .active,
                         .rx1_we, .rx2_we, .tx_valid, .start_trig2(trig2));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_act, n_rx1, n_tx, n_t2, exp_addr, bad;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pri = 0; pri < 2; pri++) begin
      @(negedge clk) trig1 = 1;
      @(negedge clk) trig1 = 0;
      n_act = 0; n_rx1 = 0; n_tx = 0; n_t2 = 0; exp_addr = 0; bad = 0;
      for (int c = 0; c < D + 20; c++) begin
        if (c == 100) trig1 = 1;             // spurious trigger inside the window
        if (c == 101) trig1 = 0;
        if (active) begin
          n_act++;
          if (addr != 12'(exp_addr)) bad++;
          if (rx1_we != (exp_addr < K) || tx_valid != (exp_addr < K) || !rx2_we) bad++;
          exp_addr++;
        end
        if (rx1_we) n_rx1++;
        if (tx_valid) n_tx++;
        if (trig2) begin
          n_t2++;
          check(n_act == D && !active, "Start trigger 2 right after the last address");
        end
        @(negedge clk);
      end
      check(n_act == D, $sformatf("window of %0d samples, got %0d", D, n_act));
      check(n_rx1 == K && n_tx == K, "RX1 and TX windows of K samples");
      check(bad == 0, $sformatf("address sequence errors %0d", bad));
      check(n_t2 == 1, "one Start trigger 2");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
