// tb_output_fifo: random writes and reads on an 8-deep FIFO against a queue
// model: data order, read latency, empty/full/count, dropping of a write
// while full with the sticky overflow flag, and ignored reads while empty.
module tb_output_fifo;
  localparam int D = 8;
  logic clk = 0, rst_n = 0, wr_en = 0, rd_en = 0;
  logic [63:0] din = '0, dout;
  logic dout_valid, empty, full, overflow;
  logic [3:0] count;
  int checks = 0, failures = 0;
  logic [63:0] q [$];

  output_fifo #(.DEPTH(D)) dut (.clk, .rst_n, .wr_en, .din, .rd_en, .dout, .dout_valid, .empty, .full, .count, .overflow);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] e;
    bit do_rd, exp_ovf = 0;
    int bad = 0, n_full = 0, n_empty_rd = 0, sz;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk) begin
        // phases: mostly write, then mostly read, alternately
        wr_en = ((n / 200) % 2 == 0) ? ($urandom_range(0, 9) < 8) : ($urandom_range(0, 9) < 2);
        rd_en = ((n / 200) % 2 == 0) ? ($urandom_range(0, 9) < 2) : ($urandom_range(0, 9) < 8);
        din = {$urandom, $urandom};
        if (count != 4'(q.size()) || empty != (q.size() == 0) || full != (q.size() == D)) bad++;
        sz = q.size();
        do_rd = rd_en && sz > 0;
        if (rd_en && q.size() == 0) n_empty_rd++;
        if (do_rd) e = q.pop_front();
        if (wr_en) begin
          if (sz < D) q.push_back(din);
          else begin exp_ovf = 1; n_full++; end
        end
      end
      @(posedge clk); #1;
      if (dout_valid != do_rd) bad++;
      if (do_rd && dout != e) bad++;
      if (overflow != exp_ovf) bad++;
    end
    check(bad == 0, $sformatf("mismatches %0d", bad));
    check(n_full > 0 && overflow, "overflow exercised");
    check(n_empty_rd > 0, "read while empty exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
