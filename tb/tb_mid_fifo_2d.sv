// tb_mid_fifo_2d: synchronisation of one link with skewed lanes.
//
// Several events are written, each lane's words arriving with its own random
// delay (as links with different transmission times would deliver them), one
// lane masked in some runs. gbt_fifo_sync_o must rise only when every
// unmasked lane of every plane holds a word. sync_all_i follows the link's
// own sync; gbt_s2_busy_i is held high for a while to check that it stalls
// the readout. Each readout must be an 8-clock burst, lane 7 first, with
// the four plane buses carrying that lane's words of the oldest event.
module tb_mid_fifo_2d;
  import mid_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [NUM_LOC-1:0] wv, mask;
  o2_word_t [NUM_LOC-1:0][NUM_PLANES-1:0] wd;
  logic sync_all, s2_busy, sync, dv, ovf;
  logic [2:0] card;
  word_t [NUM_PLANES-1:0] dout;

  mid_fifo_2d dut (.clk_i(clk), .rst_n_i(rst_n), .gbt_rfmt_data_v_i(wv), .gbt_rfmt_data_i(wd),
    .lane_mask_i(mask), .sync_all_i(sync_all), .gbt_s2_busy_i(s2_busy), .gbt_fifo_sync_o(sync),
    .gbt_fifo_data_v_o(dv), .gbt_fifo_card_o(card), .gbt_fifo_data_o(dout), .gbt_fifo_overflow_o(ovf));
  assign sync_all = sync;

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

  function automatic o2_word_t mkw(int ev, int k, int p);
    o2_word_t w = '0;
    w.det_elem = 7'(p + 1); w.column = 8'(ev); w.loc_pos = 4'(k); w.bp = 16'(ev * 256 + k * 16 + p);
    return w;
  endfunction

  int stalls = 0;
  initial begin
    wv = '0; wd = '0; mask = '0; s2_busy = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int ev = 0; ev < 12; ev++) begin
      automatic int delay[NUM_LOC];
      automatic int last = 0;
      mask = (ev % 3 == 2) ? 8'h10 : 8'h00;
      foreach (delay[k]) begin delay[k] = $urandom_range(0, 6); if (delay[k] > last && !mask[k]) last = delay[k]; end
      for (int t = 0; t <= last; t++) begin
        @(negedge clk);
        chk(!sync, "no sync while a lane is missing");
        wv = '0;
        for (int k = 0; k < NUM_LOC; k++) if (delay[k] == t || (mask[k] && t == 0)) begin
          wv[k] = 1;
          for (int p = 0; p < 4; p++) wd[k][p] = mkw(ev, k, p);
        end
      end
      @(negedge clk); wv = '0;
      if (ev % 4 == 1) begin
        // Stage 2 busy: readout must wait although synchronised
        s2_busy = 1;
        repeat (5) begin
          @(negedge clk);
          chk(!dv, "stalled while Stage 2 busy");
          if (sync) stalls++;
        end
        s2_busy = 0;
      end
      // wait for the burst
      while (!dv) @(negedge clk);
      for (int k = NUM_LOC - 1; k >= 0; k--) begin
        chk(dv && card == 3'(k), $sformatf("ev %0d burst order lane %0d", ev, k));
        for (int p = 0; p < 4; p++)
          chk(dout[p] == (mask[k] ? word_t'(1) << DUMMY_BIT : word_t'(mkw(ev, k, p))),
              $sformatf("ev %0d lane %0d plane %0d data %h", ev, k, p, dout[p]));
        @(negedge clk);
      end
      chk(!dv, "8-clock burst");
    end
    chk(stalls > 0, "stage 2 stall exercised");
    chk(!ovf, "no overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
