// mid_o2_header_synth: O2 header synthesis from regional and local card IDs.
//
// The regional ID (0..7 = regional crate of this detector half) and the
// local ID (0..15, relative to the regional crate) select one entry of a
// 128-entry lookup table built at elaboration from the detector geometry in
// mid_pkg. The entry gives the RPC element, the column and the card's
// position in that column. One header is produced per plane with
// DetElemID = 18*plane + RPC + 1 (1..72), the column ID and the position;
// strip fields are left zero for the reformatting stage to fill in.
// A card slot that is not equipped (or a regional ID of 8..15, outside this
// half) yields headers with the dummy bit set so the data is rejected later.
// Timing: o2_h_syn_valid_o and the four headers appear one clock after
// o2_h_syn_valid_i (registered outputs); headers hold until the next request.
// Port names follow the published timing diagram; the DetElemID numbering
// and the column/position counting are this design's choice.
module mid_o2_header_synth
  import mid_pkg::*;
(
  input  logic        clk_i,
  input  logic        reset_n_i,
  input  logic        o2_h_syn_valid_i,
  input  logic [3:0]  o2_h_syn_reg_id_i,
  input  logic [3:0]  o2_h_syn_loc_id_i,
  output logic        o2_h_syn_valid_o,
  output o2_word_t    o2_h_syn_mt11_o,
  output o2_word_t    o2_h_syn_mt12_o,
  output o2_word_t    o2_h_syn_mt21_o,
  output o2_word_t    o2_h_syn_mt22_o
);

  localparam int unsigned LUT_N = NUM_CRATES * CRATE_CARDS;
  typedef loc_geo_t [LUT_N-1:0] lut_t;

  function automatic lut_t build_lut();
    lut_t t;
    for (int unsigned c = 0; c < NUM_CRATES; c++)
      for (int unsigned l = 0; l < CRATE_CARDS; l++)
        t[c*CRATE_CARDS + l] = crate_geometry(c, l);
    return t;
  endfunction

  localparam lut_t LUT = build_lut();

  loc_geo_t geo;
  always_comb begin
    if (o2_h_syn_reg_id_i[3]) geo = '0;
    else                      geo = LUT[{o2_h_syn_reg_id_i[2:0], o2_h_syn_loc_id_i}];
  end

  function automatic o2_word_t make_hdr(input loc_geo_t g, input int unsigned plane);
    o2_word_t w;
    w          = '0;
    w.dummy    = ~g.valid;
    w.det_elem = g.valid ? 7'(18*plane + 32'(g.rpc) + 1) : 7'd0;
    w.column   = {5'd0, g.column};
    w.loc_pos  = g.pos;
    return w;
  endfunction

  always_ff @(posedge clk_i or negedge reset_n_i) begin
    if (!reset_n_i) begin
      o2_h_syn_valid_o <= 1'b0;
      o2_h_syn_mt11_o  <= '0;
      o2_h_syn_mt12_o  <= '0;
      o2_h_syn_mt21_o  <= '0;
      o2_h_syn_mt22_o  <= '0;
    end else begin
      o2_h_syn_valid_o <= o2_h_syn_valid_i;
      if (o2_h_syn_valid_i) begin
        o2_h_syn_mt11_o <= make_hdr(geo, 0);
        o2_h_syn_mt12_o <= make_hdr(geo, 1);
        o2_h_syn_mt21_o <= make_hdr(geo, 2);
        o2_h_syn_mt22_o <= make_hdr(geo, 3);
      end
    end
  end

endmodule
