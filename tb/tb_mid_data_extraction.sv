// tb_mid_data_extraction: random frames on all ten byte lanes.
//
// Each lane gets a queue of frames (random fired masks, IDs, strips, random
// idle gaps) and the GBT word is built from the queue heads; is_valid is
// dropped now and then to check that lanes hold. Every loc_done pulse is
// compared with the frame expected next on that lane; the regional lane's ID,
// trigger and bunch counter are checked the same way. Lane 3's frame with
// all planes fired must complete 21 sampled clocks after its status byte.
module tb_mid_data_extraction;
  import mid_pkg::*;
  import mid_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  logic is_valid, is_data;
  logic [GBT_W-1:0] data;
  logic [NUM_LOC-1:0]        loc_done;
  logic [NUM_LOC-1:0][3:0]   loc_id, loc_fired;
  logic [NUM_LOC-1:0][15:0]  loc_bc;
  logic [NUM_LOC-1:0][3:0][15:0] loc_bp, loc_nbp;
  logic reg_done, rh_done;
  logic [3:0] reg_id;
  logic [7:0] reg_trig;
  logic [15:0] reg_bc;

  mid_data_extraction dut (
    .clk_i(clk), .rst_n_i(rst_n), .is_valid_i(is_valid), .is_data_i(is_data), .data_i(data),
    .loc_done_o(loc_done), .loc_id_o(loc_id), .loc_fired_o(loc_fired), .loc_bc_o(loc_bc),
    .loc_bp_o(loc_bp), .loc_nbp_o(loc_nbp), .reg_done_o(reg_done), .reg_id_o(reg_id),
    .reg_trigger_o(reg_trig), .reg_bc_o(reg_bc), .rh_done_o(rh_done));

  always #5 clk = ~clk;

  typedef struct {
    logic [3:0] id, fired;
    logic [15:0] bc;
    logic [7:0] trig;
    logic [3:0][15:0] bp, nbp;
  } exp_t;

  int checks = 0, failures = 0;
  bq_t lane_q[10];
  exp_t exp_q[10][$];
  int done_cnt[10];

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int FRAMES = 40;

  initial begin
    is_valid = 0; is_data = 0; data = '0;
    for (int ln = 0; ln < 10; ln++) begin
      automatic bit local_lane = (ln != 4 && ln != 9);
      for (int f = 0; f < FRAMES; f++) begin
        automatic exp_t e;
        automatic int gap = $urandom_range(0, 3);
        e.id = 4'($urandom); e.fired = (f == 0) ? 4'hF : 4'($urandom);
        e.bc = 16'($urandom); e.trig = 8'($urandom);
        for (int p = 0; p < 4; p++) begin
          e.bp[p]  = e.fired[p] ? 16'($urandom) : 16'h0;
          e.nbp[p] = e.fired[p] ? 16'($urandom) : 16'h0;
        end
        for (int g = 0; g < gap; g++) lane_q[ln].push_back(8'h00);
        if (local_lane) push_local(lane_q[ln], 8'h01, e.trig, e.bc, e.id, e.fired, e.bp, e.nbp);
        else            push_header(lane_q[ln], 8'h02, e.trig, e.bc, e.id, 8'h0);
        exp_q[ln].push_back(e);
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // drive
    for (int cyc = 0; cyc < FRAMES * 40; cyc++) begin
      automatic bit v = ($urandom_range(0, 9) != 0);
      is_valid <= v; is_data <= 1'b1;
      for (int ln = 0; ln < 10; ln++) begin
        automatic byte unsigned b = 8'h00;
        if (v && lane_q[ln].size() > 0) b = lane_q[ln].pop_front();
        data[8*ln +: 8] <= b;
      end
      @(posedge clk);
    end
    is_valid <= 0;
    repeat (5) @(posedge clk);
    for (int ln = 0; ln < 10; ln++) chk(done_cnt[ln] == FRAMES, $sformatf("lane %0d frames %0d", ln, done_cnt[ln]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Latency of the first (all-planes) frame on lane LC3: status byte in the
  // first sampled clock, 21 bytes, done one clock after the last byte.
  int first_sample = -1, cyc_cnt = 0, samples = 0;
  always @(posedge clk) if (rst_n) begin
    cyc_cnt <= cyc_cnt + 1;
    if (is_valid && is_data && data[8*3+7] && first_sample < 0) first_sample <= samples;
    if (is_valid && is_data) samples <= samples + 1;
  end

  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < NUM_LOC; k++) if (loc_done[k]) begin
      automatic int ln = lane_byte(k);
      automatic exp_t e = exp_q[ln].pop_front();
      if (k == 3 && done_cnt[ln] == 0)
        chk(samples - first_sample == 21, $sformatf("LC3 frame took %0d sampled bytes", samples - first_sample));
      done_cnt[ln]++;
      chk(loc_id[k] == e.id && loc_fired[k] == e.fired && loc_bc[k] == e.bc,
          $sformatf("lane %0d header id %h/%h fired %h/%h bc %h/%h", k, loc_id[k], e.id, loc_fired[k], e.fired, loc_bc[k], e.bc));
      for (int p = 0; p < 4; p++)
        chk(loc_bp[k][p] == e.bp[p] && loc_nbp[k][p] == e.nbp[p],
            $sformatf("lane %0d plane %0d bp %h/%h nbp %h/%h", k, p, loc_bp[k][p], e.bp[p], loc_nbp[k][p], e.nbp[p]));
    end
    if (reg_done) begin
      automatic exp_t e = exp_q[4].pop_front();
      done_cnt[4]++;
      chk(reg_id == e.id && reg_trig == e.trig && reg_bc == e.bc, "regional header");
    end
    if (rh_done) begin
      void'(exp_q[9].pop_front());
      done_cnt[9]++;
    end
  end
endmodule
