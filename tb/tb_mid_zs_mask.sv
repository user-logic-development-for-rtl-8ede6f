// tb_mid_zs_mask: lane masks of all 16 links.
//
// The expected unequipped slots come from the detector map: crate 2 and 3
// have 14 local cards (link 5 and 7 lanes 6-7 empty), crate 7 has 9 (link
// 14 complete, link 15 lanes 1-7 empty); every other lane is equipped. The
// fault input must mask all 8 lanes of its link one clock later.
module tb_mid_zs_mask;
  import mid_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [NUM_LINKS-1:0] fault;
  logic [NUM_LINKS-1:0][NUM_LOC-1:0] mask;

  for (genvar l = 0; l < NUM_LINKS; l++) begin : g_l
    mid_zs_mask #(.LINK(l)) dut (.clk_i(clk), .rst_n_i(rst_n), .gbt_fault_i(fault[l]), .lane_mask_o(mask[l]));
  end

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [NUM_LOC-1:0] absent(int l);
    case (l)
      5, 7:  return 8'b1100_0000;
      15:    return 8'b1111_1110;
      default: return 8'h00;
    endcase
  endfunction

  initial begin
    fault = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    for (int l = 0; l < NUM_LINKS; l++) chk(mask[l] == absent(l), $sformatf("link %0d mask %b", l, mask[l]));
    for (int it = 0; it < 20; it++) begin
      automatic logic [NUM_LINKS-1:0] f = NUM_LINKS'($urandom);
      fault = f;
      @(negedge clk);
      for (int l = 0; l < NUM_LINKS; l++)
        chk(mask[l] == (f[l] ? 8'hFF : absent(l)), $sformatf("link %0d fault %b mask %b", l, f[l], mask[l]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
