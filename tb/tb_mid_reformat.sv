// tb_mid_reformat: random local-card frames into the reformatting stage.
//
// Drives loc_done pulses on random lanes with random IDs, fired masks and
// strips (changing the strip inputs the clock after, as the next frame
// would) and checks one clock later: valid on the same lanes, strips in
// bits 31:0 of each plane word, dummy set for planes not fired and for
// unequipped slots, header fields consistent with the crate/local ID.
module tb_mid_reformat;
  import mid_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [NUM_LOC-1:0]            done;
  logic [NUM_LOC-1:0][3:0]       id, fired;
  logic [NUM_LOC-1:0][3:0][15:0] bp, nbp;
  logic [3:0]                    reg_id;
  logic [NUM_LOC-1:0]            vo;
  o2_word_t [NUM_LOC-1:0][NUM_PLANES-1:0] wo;

  mid_reformat dut (.clk_i(clk), .rst_n_i(rst_n), .loc_done_i(done), .loc_id_i(id),
    .loc_fired_i(fired), .loc_bp_i(bp), .loc_nbp_i(nbp), .reg_id_i(reg_id),
    .gbt_rfmt_data_v_o(vo), .gbt_rfmt_data_o(wo));

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
    logic [NUM_LOC-1:0]            e_done;
    logic [NUM_LOC-1:0][3:0]       e_id, e_fired;
    logic [NUM_LOC-1:0][3:0][15:0] e_bp, e_nbp;
    logic [3:0] e_reg;
    done = '0; id = '0; fired = '0; bp = '0; nbp = '0; reg_id = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      done = NUM_LOC'($urandom); reg_id = (it % 10 == 9) ? 4'(8 + $urandom_range(0,7)) : 4'($urandom_range(0,7));
      for (int k = 0; k < NUM_LOC; k++) begin
        id[k] = 4'($urandom); fired[k] = (it % 3 == 0) ? 4'hF : 4'($urandom);
        for (int p = 0; p < 4; p++) begin bp[k][p] = 16'($urandom); nbp[k][p] = 16'($urandom); end
      end
      e_done = done; e_id = id; e_fired = fired; e_bp = bp; e_nbp = nbp; e_reg = reg_id;
      @(negedge clk);
      done = '0; bp = ~bp; nbp = ~nbp; fired = ~fired;   // next frame overwrites
      chk(vo == e_done, "valid lanes");
      for (int k = 0; k < NUM_LOC; k++) if (e_done[k]) begin
        automatic loc_geo_t g = e_reg[3] ? loc_geo_t'(0) : crate_geometry(e_reg[2:0], e_id[k]);
        for (int p = 0; p < 4; p++) begin
          automatic o2_word_t w = wo[k][p];
          chk(w.bp == e_bp[k][p] && w.nbp == e_nbp[k][p], $sformatf("strips lane %0d plane %0d", k, p));
          chk(w.dummy == (!g.valid || !e_fired[k][p]), $sformatf("dummy lane %0d plane %0d", k, p));
          if (g.valid) chk(w.det_elem == 7'(18*p + 32'(g.rpc) + 1) && w.column == 8'(g.column) && w.loc_pos == g.pos, "header");
          else chk(w.det_elem == 0, "no location for empty slot");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
