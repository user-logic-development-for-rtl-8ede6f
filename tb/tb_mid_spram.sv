// tb_mid_spram: S3 RAM (128 x 64): fill all 128 words, then random reads
// and writes; a read returns the stored word one clock after the address.
module tb_mid_spram;
  logic clk = 0;
  logic we;
  logic [6:0] a;
  logic [63:0] wd, rd;
  mid_spram dut (.clk_i(clk), .we_i(we), .addr_i(a), .wdata_i(wd), .rdata_o(rd));
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
  logic [63:0] model [128];
  initial begin
    we = 0; a = 0; wd = 0;
    for (int i = 0; i < 128; i++) begin
      @(negedge clk); we = 1; a = 7'(i); wd = {$urandom, $urandom}; model[i] = wd;
    end
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      we = ($urandom_range(0, 3) == 0); a = 7'($urandom); wd = {$urandom, $urandom};
      if (we) model[a] = wd;
      else begin
        automatic logic [63:0] e = model[a];
        @(negedge clk); we = 0;
        chk(rd == e, $sformatf("read %0d", a));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
