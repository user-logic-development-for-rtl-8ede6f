// tb_mid_user_logic: end-to-end run of the whole user logic at its default
// size (16 GBT links, 64-word FIFOs).
//
// Each event is a front-end test pattern: every equipped local card sends a
// frame with random strips, each regional card an RL and an RH frame. The
// links start each event with a random skew of up to 12 clocks, so the
// 2-D FIFOs must wait for the slowest link. Events follow each other faster
// than Stage 3 can drain them, so Stage 1 stalls on Stage 2 and Stage 2 on
// Stage 3. Some events fire only some planes; link 5 is reported faulty and
// sends nothing; the bunch counter restarts once (new heartbeat frame).
// The checker rebuilds the expected 512-word stream of every event (planes
// MT11..MT22, crates 0..7, local IDs 0..15) and compares every clock of the
// readout: real words with s3_ram_data_v_o, masked or unfired words as
// rejected dummies. It counts each mechanism and fails if one never occurs.
module tb_mid_user_logic;
  import mid_pkg::*;
  import mid_tb_pkg::*;

  localparam int EVENTS = 6;
  localparam int SPACING = 40;
  localparam int FAULT_LINK = 5;

  logic clk = 0, rst_n = 0;
  logic [NUM_LINKS-1:0] is_valid, is_data, fault;
  logic [NUM_LINKS-1:0][GBT_W-1:0] data;
  logic ov, dum, s3b, s2b, sync, nh, ovf;
  word_t od;
  logic [31:0] hbid;
  logic [7:0] trig;

  mid_user_logic dut (.clk_i(clk), .rst_n_i(rst_n), .is_valid_i(is_valid), .is_data_i(is_data),
    .data_i(data), .gbt_fault_i(fault), .s3_ram_data_v_o(ov), .s3_ram_data_o(od), .s3_dummy_o(dum),
    .s3_busy_o(s3b), .s2_busy_o(s2b), .sync_o(sync), .hbid_o(hbid), .trigger_o(trig),
    .new_hbf_o(nh), .fifo_overflow_o(ovf));

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // stimulus storage
  bq_t lane_q [NUM_LINKS][10];
  logic [3:0] fired_e [EVENTS];
  logic [15:0] bp_e [EVENTS][NUM_CRATES][CRATE_CARDS][4];
  logic [15:0] nbp_e [EVENTS][NUM_CRATES][CRATE_CARDS][4];
  int bc_e [EVENTS];

  // expected output stream
  typedef struct { bit dummy; word_t w; } exp_t;
  exp_t exp_q[$];

  int n_sync_wait = 0, n_s2_stall = 0, n_s3_stall = 0, n_unfired = 0, n_fault = 0, n_absent = 0;
  int n_hbf = 0, n_valid = 0, n_dummy = 0, first_out = -1, cyc = 0;

  initial begin
    is_valid = '0; is_data = '0; data = '0; fault = '0;
    fault[FAULT_LINK] = 1'b1;
    for (int e = 0; e < EVENTS; e++) begin
      fired_e[e] = (e == 2) ? 4'b0101 : (e == 4) ? 4'b1000 : 4'hF;
      bc_e[e]    = (e < 3) ? 100 + 37 * e : 3 + e;   // counter restarts at event 3
      for (int c = 0; c < NUM_CRATES; c++)
        for (int l = 0; l < CRATE_CARDS; l++)
          for (int p = 0; p < 4; p++) begin
            bp_e[e][c][l][p]  = 16'($urandom);
            nbp_e[e][c][l][p] = 16'($urandom);
          end
    end
    // byte streams
    for (int e = 0; e < EVENTS; e++)
      for (int lk = 0; lk < NUM_LINKS; lk++) begin
        automatic int skew = $urandom_range(0, 12);
        automatic int start = e * SPACING + skew;
        automatic int c = lk / 2;
        if (lk == FAULT_LINK) continue;
        for (int ln = 0; ln < 10; ln++)
          while (lane_q[lk][ln].size() < start) lane_q[lk][ln].push_back(8'h00);
        push_header(lane_q[lk][4], 8'h02, 8'h5A, 16'(bc_e[e]), 8'(c), 8'h0);
        push_header(lane_q[lk][9], 8'h03, 8'h5A, 16'(bc_e[e]), 8'(c), 8'h0);
        for (int k = 0; k < NUM_LOC; k++) begin
          automatic int loc = (lk % 2) * NUM_LOC + k;
          automatic logic [3:0][15:0] bp, nbp;
          if (crate_card(c, loc) == 0) continue;        // empty slot sends nothing
          for (int p = 0; p < 4; p++) begin bp[p] = bp_e[e][c][loc][p]; nbp[p] = nbp_e[e][c][loc][p]; end
          push_local(lane_q[lk][lane_byte(k)], 8'h01, 8'h5A, 16'(bc_e[e]), 8'(loc), 8'(fired_e[e]), bp, nbp);
        end
      end
    // expected readout
    for (int e = 0; e < EVENTS; e++)
      for (int p = 0; p < 4; p++)
        for (int c = 0; c < NUM_CRATES; c++)
          for (int loc = 0; loc < CRATE_CARDS; loc++) begin
            automatic int lk = 2 * c + loc / NUM_LOC;
            automatic loc_geo_t g = crate_geometry(c, loc);
            automatic exp_t x;
            x.w = '0;
            if (!g.valid) begin x.dummy = 1; if (p == 0) n_absent++; end
            else if (lk == FAULT_LINK) begin x.dummy = 1; if (p == 0) n_fault++; end
            else begin
              automatic o2_word_t w = '0;
              w.det_elem = 7'(18 * p + 32'(g.rpc) + 1);
              w.column   = 8'(g.column);
              w.loc_pos  = g.pos;
              w.bp       = bp_e[e][c][loc][p];
              w.nbp      = nbp_e[e][c][loc][p];
              w.dummy    = !fired_e[e][p];
              x.dummy    = w.dummy;
              if (w.dummy) n_unfired++;
              x.w = w;
            end
            exp_q.push_back(x);
          end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // drive all links
    for (int t = 0; t < EVENTS * SPACING + 40; t++) begin
      @(negedge clk);
      for (int lk = 0; lk < NUM_LINKS; lk++) begin
        is_valid[lk] = 1'b1; is_data[lk] = 1'b1;
        for (int ln = 0; ln < 10; ln++)
          data[lk][8*ln +: 8] = (lane_q[lk][ln].size() > 0) ? lane_q[lk][ln].pop_front() : 8'h00;
      end
    end
    data = '0;
    while (exp_q.size() > 0) @(negedge clk);
    repeat (5) @(negedge clk);
    chk(!s3b && !s2b, "pipeline idle at the end");
    chk(!ovf, "no FIFO overflow");
    chk(hbid == 1, $sformatf("one heartbeat frame boundary, hbid %0d", hbid));
    chk(trig == 8'h5A, "trigger byte held for the RDH");
    $display("mechanisms: sync_wait=%0d s2_stall=%0d s3_stall=%0d unfired_dummies=%0d fault_dummies=%0d absent_dummies=%0d new_hbf=%0d",
             n_sync_wait, n_s2_stall, n_s3_stall, n_unfired, n_fault, n_absent, n_hbf);
    $display("words: valid=%0d dummy=%0d first output at clock %0d", n_valid, n_dummy, first_out);
    chk(n_sync_wait > 0, "link skew made the FIFOs wait for synchronisation");
    chk(n_s2_stall > 0, "Stage 1 stalled on Stage 2 busy");
    chk(n_s3_stall > 0, "Stage 2 stalled on Stage 3 busy");
    chk(n_unfired > 0 && n_fault > 0 && n_absent > 0, "all three kinds of dummy words");
    chk(n_hbf == 1, "heartbeat frame change seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitors
  always @(negedge clk) if (rst_n) begin
    cyc++;
    if (!sync && |dut.link_sync && !s2b) n_sync_wait++;
    if (sync && s2b) n_s2_stall++;
    if (s2b && s3b && !dut.s23_v) n_s3_stall++;
    if (nh) n_hbf++;
    if (ov || dum) begin
      if (first_out < 0) first_out = cyc;
      if (exp_q.size() == 0) chk(0, "output beyond the expected stream");
      else begin
        automatic exp_t x = exp_q.pop_front();
        chk(!(ov && dum), "valid and dummy exclusive");
        chk(dum == x.dummy, $sformatf("dummy flag, %0d words left", exp_q.size()));
        if (!x.dummy) chk(od == x.w, $sformatf("word %h exp %h", od, x.w));
        if (ov) n_valid++; else n_dummy++;
      end
    end
  end
endmodule
