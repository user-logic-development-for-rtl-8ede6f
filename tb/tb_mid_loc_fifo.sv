// tb_mid_loc_fifo: random pushes and pops against a queue model, default
// 64 x 64 size. Checks data order, empty/full flags, that a write when full
// is dropped and sets the sticky overflow flag, and fills to exactly 64.
module tb_mid_loc_fifo;
  logic clk = 0, rst_n = 0;
  logic wr, rd, empty, full, ovf;
  logic [63:0] din, dout;
  mid_loc_fifo dut (.clk_i(clk), .rst_n_i(rst_n), .wr_i(wr), .data_rx_i(din), .rd_i(rd),
    .data_tx_o(dout), .empty_o(empty), .full_o(full), .overflow_o(ovf));
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic [63:0] q[$];
  bit exp_ovf = 0;
  initial begin
    wr = 0; rd = 0; din = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      automatic int phase = (it / 500) % 3;   // 0: fill-biased, 1: drain-biased, 2: even
      @(negedge clk);
      chk(empty == (q.size() == 0), "empty flag");
      chk(full == (q.size() == 64), "full flag");
      chk(ovf == exp_ovf, "overflow flag");
      if (q.size() > 0) chk(dout == q[0], "head data");
      wr = (phase == 0) ? ($urandom_range(0, 9) < 8) : (phase == 1) ? ($urandom_range(0, 9) < 2) : $urandom_range(0, 1);
      rd = (phase == 0) ? ($urandom_range(0, 9) < 2) : (phase == 1) ? ($urandom_range(0, 9) < 8) : $urandom_range(0, 1);
      din = {$urandom, $urandom};
      begin
        // model from the state before the clock: pop only if not empty,
        // a write while full is dropped even if a read happens too
        automatic int n = q.size();
        @(posedge clk);
        if (rd && n > 0) void'(q.pop_front());
        if (wr && n == 64) exp_ovf = 1;
        else if (wr) q.push_back(din);
      end
    end
    chk(exp_ovf, "overflow was exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
