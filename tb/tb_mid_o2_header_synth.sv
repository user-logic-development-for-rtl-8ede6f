// tb_mid_o2_header_synth: all 256 (regional ID, local ID) combinations.
//
// Checks the 1-clock latency, DetElemID = 18*plane + RPC + 1 on all four
// planes, that exactly 117 slots are equipped and all their (RPC, column,
// position) triples differ, that regional IDs 8-15 and empty slots give
// dummy headers, and a set of hand-read detector positions (card number,
// RPC element, column counted from the beam side, position from the bottom).
module tb_mid_o2_header_synth;
  import mid_pkg::*;

  logic clk = 0, rst_n = 0;
  logic vi, vo;
  logic [3:0] rid, lid;
  o2_word_t h11, h12, h21, h22;

  mid_o2_header_synth dut (
    .clk_i(clk), .reset_n_i(rst_n), .o2_h_syn_valid_i(vi), .o2_h_syn_reg_id_i(rid),
    .o2_h_syn_loc_id_i(lid), .o2_h_syn_valid_o(vo), .o2_h_syn_mt11_o(h11),
    .o2_h_syn_mt12_o(h12), .o2_h_syn_mt21_o(h21), .o2_h_syn_mt22_o(h22));

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Hand-read positions: {crate, local ID, RPC, column, position}.
  typedef struct { int crate, loc, rpc, col, pos; } ref_t;
  ref_t refs[$] = '{
    '{0, 0, 14, 0, 0},   // card 1
    '{0, 7, 17, 0, 2},   // card 8
    '{0, 8, 1, 0, 0},    // card 9
    '{0, 15, 4, 0, 0},   // card 16
    '{2, 0, 14, 1, 0},   // card 17
    '{2, 9, 0, 1, 0},    // card 26
    '{2, 13, 1, 1, 0},   // card 30
    '{1, 0, 1, 1, 1},    // card 31
    '{1, 7, 4, 1, 0},    // card 38
    '{3, 13, 1, 2, 0},   // card 52
    '{1, 8, 1, 2, 1},    // card 53
    '{1, 15, 4, 2, 0},   // card 60
    '{4, 8, 0, 3, 1},    // card 69
    '{5, 5, 17, 4, 0},   // card 82
    '{6, 15, 4, 5, 0},   // card 108
    '{7, 4, 0, 6, 0},    // card 113
    '{7, 8, 4, 6, 0}     // card 117
  };

  o2_word_t got [16][16][4];
  int lat_ok;

  initial begin
    int valid_cnt;
    bit seen [int];
    vi = 0; rid = 0; lid = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 16; r++)
      for (int l = 0; l < 16; l++) begin
        @(negedge clk); vi = 1; rid = 4'(r); lid = 4'(l);
        @(negedge clk); vi = 0; rid = 4'($urandom); lid = 4'($urandom);
        chk(vo == 1'b1, "valid_o one clock after valid_i");
        got[r][l][0] = h11; got[r][l][1] = h12; got[r][l][2] = h21; got[r][l][3] = h22;
        @(negedge clk);
        chk(vo == 1'b0, "valid_o is a single pulse");
        chk(h11 == got[r][l][0], "header holds");
      end
    valid_cnt = 0;
    for (int r = 0; r < 16; r++)
      for (int l = 0; l < 16; l++) begin
        automatic o2_word_t w = got[r][l][0];
        if (!w.dummy) begin
          automatic int key = w.det_elem * 4096 + w.column * 16 + w.loc_pos;
          valid_cnt++;
          chk(r < 8, "regional IDs 8-15 are not in this half");
          chk(!seen.exists(key), $sformatf("location unique r%0d l%0d", r, l));
          seen[key] = 1;
          chk(w.det_elem >= 1 && w.det_elem <= 18, "MT11 DetElemID in 1..18");
          chk(w.column < 7, "column 0..6");
          for (int p = 1; p < 4; p++)
            chk(got[r][l][p].det_elem == w.det_elem + 7'(18*p) && got[r][l][p].column == w.column
                && got[r][l][p].loc_pos == w.loc_pos && !got[r][l][p].dummy, "plane offset 18");
        end
        for (int p = 0; p < 4; p++)
          chk(got[r][l][p].nbp == 0 && got[r][l][p].bp == 0 && got[r][l][p].rsvd == 0, "strip fields empty");
      end
    chk(valid_cnt == 117, $sformatf("117 equipped slots, got %0d", valid_cnt));
    chk(got[2][14][0].dummy && got[3][15][0].dummy && got[7][9][0].dummy && got[7][15][0].dummy, "empty slots are dummy");
    foreach (refs[i]) begin
      automatic o2_word_t w = got[refs[i].crate][refs[i].loc][0];
      chk(!w.dummy && w.det_elem == 7'(refs[i].rpc + 1) && w.column == 8'(refs[i].col) && w.loc_pos == 4'(refs[i].pos),
          $sformatf("ref %0d: crate %0d loc %0d -> de %0d col %0d pos %0d", i, refs[i].crate, refs[i].loc, w.det_elem, w.column, w.loc_pos));
      w = got[refs[i].crate][refs[i].loc][3];
      chk(w.det_elem == 7'(54 + refs[i].rpc + 1), "MT22 DetElemID");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
