// tb_mid_s2_readout: Stage 2 merge of 16 links into 8 crates.
//
// Each payload is an 8-clock Stage 1 burst on all 16 links (lane 7 first),
// with a word that encodes (payload, link, lane, plane). A Stage 3 model
// raises its busy one clock after the first s23 valid and keeps it for a
// random time after the burst, so Stage 2 must sometimes wait. Checks:
// s2_s3_busy_o rises one clock after the burst starts and stays high until
// the readout ends; no readout while Stage 3 is busy; each readout is 128
// consecutive clocks per plane in crate/local order (even link in local IDs
// 0-7, odd link in 8-15); Stage 1 is only sent when Stage 2 is not busy.
module tb_mid_s2_readout;
  import mid_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [NUM_LINKS-1:0] v;
  logic [NUM_LINKS-1:0][2:0] card;
  word_t [NUM_LINKS-1:0][NUM_PLANES-1:0] d;
  logic s3_busy, busy, ov;
  word_t [NUM_PLANES-1:0] od;

  mid_s2_readout dut (.clk_i(clk), .rst_n_i(rst_n), .s12_data_v_i(v), .s12_card_i(card), .s12_data_i(d),
    .s2_s3_busy_i(s3_busy), .s2_s3_busy_o(busy), .s23_data_v_o(ov), .s2_ram_data_o(od));

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

  function automatic word_t mkw(int ev, int l, int k, int p);
    return {16'hA5A5, 16'(ev), 8'(l), 8'(k), 16'(p)};
  endfunction

  // Stage 3 model
  int s3_hold = 0, waits = 0;
  always @(posedge clk) begin
    if (!rst_n) begin s3_busy <= 0; s3_hold <= 0; end
    else if (ov && !s3_busy) begin s3_busy <= 1; s3_hold <= 128 + $urandom_range(0, 300); end
    else if (s3_busy) begin
      if (s3_hold == 0) s3_busy <= 0; else s3_hold <= s3_hold - 1;
    end
  end

  // readout checker
  int rd_ev = 0, rd_idx = 0, bursts = 0;
  bit in_burst = 0;
  int last_write_t = 0, latency = -1;
  always @(negedge clk) if (rst_n) begin
    if (ov) begin
      automatic int c = rd_idx / 16, l = rd_idx % 16;
      automatic int link = 2 * c + l / 8, k = l % 8;
      if (rd_idx == 0) chk(!s3_busy || in_burst == 0, "readout starts only after Stage 3 idle");
      for (int p = 0; p < NUM_PLANES; p++)
        chk(od[p] == mkw(rd_ev, link, k, p), $sformatf("ev %0d idx %0d plane %0d got %h", rd_ev, rd_idx, p, od[p]));
      chk(busy, "busy during readout");
      rd_idx++;
      if (rd_idx == 128) begin
        rd_idx = 0; rd_ev++; bursts++;
        if (latency < 0) latency = int'($time / 10) - last_write_t;
      end
      in_burst = 1;
    end else begin
      chk(rd_idx == 0, "128 consecutive clocks");
      in_burst = 0;
    end
    if (busy && !ov && s3_busy && rd_idx == 0) waits++;
  end

  initial begin
    v = '0; card = '0; d = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int ev = 0; ev < 6; ev++) begin
      @(negedge clk);
      while (busy) @(negedge clk);
      for (int k = NUM_LOC - 1; k >= 0; k--) begin
        for (int l = 0; l < NUM_LINKS; l++) begin
          v[l] = 1; card[l] = 3'(k);
          for (int p = 0; p < NUM_PLANES; p++) d[l][p] = mkw(ev, l, k, p);
        end
        if (k == NUM_LOC - 2) chk(busy, "busy one clock after first valid");
        last_write_t = int'($time / 10);
        @(negedge clk);
      end
      v = '0;
      chk(busy, "busy holds after the burst");
    end
    while (rd_ev < 6) @(negedge clk);
    repeat (3) @(negedge clk);
    chk(!busy, "idle at the end");
    chk(bursts == 6, "six readouts");
    chk(waits > 0, "Stage 3 busy stall exercised");
    $display("Stage 2: last write to last read-out word = %0d clocks", latency);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
