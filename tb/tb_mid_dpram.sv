// tb_mid_dpram: S2 RAM (16 x 64) with random traffic on both ports.
// Each port's registered read must return the model's content one clock
// after the address; both ports write at the same time to different
// addresses (as the two links of a crate do).
module tb_mid_dpram;
  logic clk = 0;
  logic awe, bwe;
  logic [3:0] aa, ba;
  logic [63:0] awd, bwd, ard, brd;
  mid_dpram dut (.clk_i(clk), .a_we_i(awe), .a_addr_i(aa), .a_wdata_i(awd), .a_rdata_o(ard),
    .b_we_i(bwe), .b_addr_i(ba), .b_wdata_i(bwd), .b_rdata_o(brd));
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
  logic [63:0] model [16];
  initial begin
    logic [63:0] ea, eb;
    awe = 0; bwe = 0; aa = 0; ba = 0; awd = 0; bwd = 0;
    // fill
    for (int i = 0; i < 8; i++) begin
      @(negedge clk); awe = 1; bwe = 1; aa = 4'(i); ba = 4'(i + 8);
      awd = {$urandom, $urandom}; bwd = {$urandom, $urandom};
      model[i] = awd; model[i + 8] = bwd;
    end
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      awe = $urandom_range(0, 1); bwe = $urandom_range(0, 1);
      aa = 4'($urandom); ba = 4'($urandom);
      if (awe && bwe && aa == ba) ba = aa + 4'd1;
      awd = {$urandom, $urandom}; bwd = {$urandom, $urandom};
      ea = model[aa]; eb = model[ba];
      if (awe) model[aa] = awd;
      if (bwe) model[ba] = bwd;
      @(negedge clk);
      chk(ard == ea, $sformatf("port A read %0d", aa));
      chk(brd == eb, $sformatf("port B read %0d", ba));
      awe = 0; bwe = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
