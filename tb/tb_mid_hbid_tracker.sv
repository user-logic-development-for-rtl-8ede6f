// tb_mid_hbid_tracker: bunch-counter sequences with resets.
// Random increasing bunch counts, reset to a small value at random points
// (a new heartbeat frame); the HBID must count exactly those resets, the
// first dataset must not count, and the trigger must follow the dataset.
module tb_mid_hbid_tracker;
  logic clk = 0, rst_n = 0;
  logic v, nh;
  logic [15:0] bc;
  logic [7:0] trig, trig_o;
  logic [31:0] hbid;
  mid_hbid_tracker dut (.clk_i(clk), .rst_n_i(rst_n), .valid_i(v), .bc_i(bc), .trigger_i(trig),
    .hbid_o(hbid), .trigger_o(trig_o), .new_hbf_o(nh));
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
  initial begin
    int exp_hb = 0;
    int cur = 0;
    v = 0; bc = 0; trig = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 1000; it++) begin
      automatic bit reset_bc = (it > 0) && (cur > 0) && ($urandom_range(0, 19) == 0);
      @(negedge clk);
      if (reset_bc) cur = $urandom_range(0, (cur < 4) ? cur - 1 : 3);
      else cur = (it == 0) ? 1000 : cur + $urandom_range(1, 50);
      if (cur > 65535) begin cur = 5; reset_bc = 1; end
      if (reset_bc) exp_hb++;
      v = 1; bc = 16'(cur); trig = 8'($urandom);
      @(negedge clk);
      chk(hbid == 32'(exp_hb), $sformatf("hbid %0d exp %0d", hbid, exp_hb));
      chk(trig_o == trig, "trigger");
      chk(nh == reset_bc, "new_hbf exactly on resets");
      v = 0; bc = 16'($urandom);
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    chk(exp_hb > 10, "resets exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
