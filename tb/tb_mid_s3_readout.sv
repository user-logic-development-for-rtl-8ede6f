// tb_mid_s3_readout: Stage 3 merge of four plane streams.
//
// Sends 128-word bursts on the four plane inputs (some words marked dummy)
// and checks: s3_busy_o rises one clock after the burst starts; the readout
// is 512 consecutive clocks starting two clocks after the burst ends,
// plane MT11 first then MT12, MT21, MT22, addresses 0..127 each; dummy words
// appear with s3_ram_data_v_o low and s3_dummy_o high; busy drops at the end.
module tb_mid_s3_readout;
  import mid_pkg::*;
  logic clk = 0, rst_n = 0;
  logic iv, busy, ov, dum;
  word_t [NUM_PLANES-1:0] id;
  word_t od;

  mid_s3_readout dut (.clk_i(clk), .rst_n_i(rst_n), .s23_data_v_i(iv), .s2_ram_data_i(id),
    .s3_busy_o(busy), .s3_ram_data_v_o(ov), .s3_ram_data_o(od), .s3_dummy_o(dum));

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  word_t sent [NUM_PLANES][128];
  initial begin
    int dummies;
    iv = 0; id = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int ev = 0; ev < 4; ev++) begin
      @(negedge clk);
      while (busy) @(negedge clk);
      dummies = 0;
      for (int i = 0; i < 128; i++) begin
        iv = 1;
        for (int p = 0; p < NUM_PLANES; p++) begin
          automatic bit dm = ($urandom_range(0, 9) == 0);
          sent[p][i] = {dm, 7'(ev), 8'(p), 16'(i), $urandom};
          id[p] = sent[p][i];
          if (dm) dummies++;
        end
        if (i == 1) chk(busy, "busy one clock after first word");
        @(negedge clk);
      end
      iv = 0; id = '0;
      @(negedge clk);
      chk(!ov && !dum, "no output in the clock after the burst");
      @(negedge clk);
      for (int p = 0; p < NUM_PLANES; p++)
        for (int i = 0; i < 128; i++) begin
          chk(od == sent[p][i], $sformatf("ev %0d plane %0d word %0d", ev, p, i));
          chk(ov == !sent[p][i][DUMMY_BIT] && dum == sent[p][i][DUMMY_BIT], "dummy words rejected");
          if (p == NUM_PLANES - 1 && i == 127) chk(!busy, "busy drops with the last word");
          else chk(busy, "busy during readout");
          @(negedge clk);
        end
      chk(!ov && !dum, "readout is 512 clocks");
      chk(dummies > 0, "dummy rejection exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
