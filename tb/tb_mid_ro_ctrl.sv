// tb_mid_ro_ctrl: readout controller of one plane with 8 real FIFOs.
//
// Fills the lanes one at a time and checks that sync_o rises only when the
// last unmasked lane gets its word, then starts a read and checks the 8-clock
// burst: lanes 7 down to 0, one per clock starting one clock after start_i,
// masked lanes giving dummy words and not being popped.
module tb_mid_ro_ctrl;
  import mid_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [NUM_LOC-1:0] wr, empty, full, ovf, rd, mask;
  word_t [NUM_LOC-1:0] din, dout;
  logic start, sync, busy, v;
  logic [2:0] card;
  word_t data;

  for (genvar k = 0; k < NUM_LOC; k++) begin : g_f
    mid_loc_fifo #(.DEPTH(8), .WIDTH(64)) u_f (.clk_i(clk), .rst_n_i(rst_n), .wr_i(wr[k]),
      .data_rx_i(din[k]), .rd_i(rd[k]), .data_tx_o(dout[k]), .empty_o(empty[k]),
      .full_o(full[k]), .overflow_o(ovf[k]));
  end
  mid_ro_ctrl dut (.clk_i(clk), .rst_n_i(rst_n), .empty_i(empty), .data_i(dout), .mask_i(mask),
    .start_i(start), .rd_o(rd), .sync_o(sync), .busy_o(busy), .valid_o(v), .card_o(card), .data_o(data));

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
    word_t exp_w [NUM_LOC];
    wr = '0; din = '0; start = 0; mask = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      automatic int order[NUM_LOC];
      mask = (round % 4 == 3) ? NUM_LOC'($urandom) : '0;
      foreach (order[i]) order[i] = i;
      order.shuffle();
      // one word per unmasked lane, lanes arriving one after another
      for (int i = 0; i < NUM_LOC; i++) begin
        automatic int k = order[i];
        automatic int pending = 0;
        for (int j = i; j < NUM_LOC; j++) if (!mask[order[j]]) pending++;
        @(negedge clk);
        chk(sync == (pending == 0), "sync exactly when every unmasked lane holds data");
        exp_w[k] = mask[k] ? (word_t'(1) << DUMMY_BIT) : {8'(round), 8'(k), 48'($urandom)};
        if (!mask[k]) begin wr[k] = 1; din[k] = exp_w[k]; end
        @(negedge clk); wr = '0;
      end
      @(negedge clk);
      chk(sync == 1'b1, "sync after last lane");
      start = 1;
      @(negedge clk); start = 0;
      for (int j = NUM_LOC - 1; j >= 0; j--) begin
        chk(v && card == 3'(j) && data == exp_w[j], $sformatf("round %0d lane %0d", round, j));
        @(negedge clk);
      end
      chk(!v && !busy, "burst is 8 clocks");
      chk(&(empty | mask) && (empty == 8'hFF), "all popped once");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
