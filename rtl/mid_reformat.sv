// mid_reformat: data reformatting for one GBT link.
//
// For each of the 8 local-card lanes, a finished frame (loc_done_i) starts
// an O2 header synthesis from the link's regional ID and the card's local
// ID. In the same clock the card's strip registers are copied, so that one
// clock later the four O2 words (MT11, MT12, MT21, MT22) leave together with
// gbt_rfmt_data_v_o[k]: header from the lookup table, NBP pattern in bits
// 31:16 and BP pattern in bits 15:0.
// Zero suppression: a plane whose fired bit is clear sent no strip bytes;
// its word is still written (so every FIFO receives one word per event and
// synchronisation holds) but carries the dummy bit, as does every word of a
// card slot the geometry does not equip.
// Latency: 1 clock from loc_done_i to gbt_rfmt_data_v_o.
module mid_reformat
  import mid_pkg::*;
(
  input  logic clk_i,
  input  logic rst_n_i,
  input  logic [NUM_LOC-1:0]            loc_done_i,
  input  logic [NUM_LOC-1:0][3:0]       loc_id_i,
  input  logic [NUM_LOC-1:0][3:0]       loc_fired_i,
  input  logic [NUM_LOC-1:0][3:0][15:0] loc_bp_i,
  input  logic [NUM_LOC-1:0][3:0][15:0] loc_nbp_i,
  input  logic [3:0]                    reg_id_i,
  output logic [NUM_LOC-1:0]            gbt_rfmt_data_v_o,
  output o2_word_t [NUM_LOC-1:0][NUM_PLANES-1:0] gbt_rfmt_data_o
);

  for (genvar k = 0; k < NUM_LOC; k++) begin : g_card
    o2_word_t [NUM_PLANES-1:0] hdr;
    logic [3:0]        fired_q;
    logic [3:0][15:0]  bp_q, nbp_q;

    mid_o2_header_synth u_hdr (
      .clk_i, .reset_n_i(rst_n_i),
      .o2_h_syn_valid_i(loc_done_i[k]),
      .o2_h_syn_reg_id_i(reg_id_i),
      .o2_h_syn_loc_id_i(loc_id_i[k]),
      .o2_h_syn_valid_o(gbt_rfmt_data_v_o[k]),
      .o2_h_syn_mt11_o(hdr[0]), .o2_h_syn_mt12_o(hdr[1]),
      .o2_h_syn_mt21_o(hdr[2]), .o2_h_syn_mt22_o(hdr[3])
    );

    always_ff @(posedge clk_i or negedge rst_n_i) begin
      if (!rst_n_i) begin
        fired_q <= '0;
        bp_q    <= '0;
        nbp_q   <= '0;
      end else if (loc_done_i[k]) begin
        fired_q <= loc_fired_i[k];
        bp_q    <= loc_bp_i[k];
        nbp_q   <= loc_nbp_i[k];
      end
    end

    always_comb begin
      for (int p = 0; p < NUM_PLANES; p++) begin
        gbt_rfmt_data_o[k][p]       = hdr[p];
        gbt_rfmt_data_o[k][p].dummy = hdr[p].dummy | ~fired_q[p];
        gbt_rfmt_data_o[k][p].nbp   = nbp_q[p];
        gbt_rfmt_data_o[k][p].bp    = bp_q[p];
      end
    end
  end

endmodule
