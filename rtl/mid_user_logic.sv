// mid_user_logic: MID user logic of the Common Readout Unit (top level).
//
// Sixteen GBT links arrive as deserialised 80-bit words. Per link, data
// extraction captures the byte frames of 8 local cards and the regional
// card, reformatting turns each local-card frame into four 64-bit O2 words
// (one per detection plane) and the 2-D FIFO buffers them per card per
// plane. The 16 link-level sync flags are ANDed; once every FIFO of every
// link holds a word, Stage 1 moves one word per card per plane into the
// Stage 2 dual-port RAMs (8 clocks, all links and planes in parallel).
// Stage 2 merges the two links of each regional crate and sends 128 words
// per plane to Stage 3, which stores the four planes and streams them out,
// plane after plane, on one 64-bit bus (512 words per event, dummy words not
// marked valid). Stages hand over with valid/busy pairs, one payload per
// stage at a time.
// Zero suppression: gbt_fault_i[l] (broken or faulty link, from the CRU
// core) and the detector map mask FIFOs that get no data; planes a card did
// not fire get dummy words from reformatting.
// HBID: the regional bunch counter of link 0 is watched for resets and
// hbid_o counts heartbeat frames; hbid_o and trigger_o are offered for the
// raw data header of the packetiser, which is not part of this design.
// All logic runs on clk_i with the active-low asynchronous reset rst_n_i.
module mid_user_logic
  import mid_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 64
) (
  input  logic                              clk_i,
  input  logic                              rst_n_i,
  input  logic [NUM_LINKS-1:0]              is_valid_i,
  input  logic [NUM_LINKS-1:0]              is_data_i,
  input  logic [NUM_LINKS-1:0][GBT_W-1:0]   data_i,
  input  logic [NUM_LINKS-1:0]              gbt_fault_i,
  output logic                              s3_ram_data_v_o,
  output word_t                             s3_ram_data_o,
  output logic                              s3_dummy_o,
  output logic                              s3_busy_o,
  output logic                              s2_busy_o,
  output logic                              sync_o,
  output logic [31:0]                       hbid_o,
  output logic [7:0]                        trigger_o,
  output logic                              new_hbf_o,
  output logic                              fifo_overflow_o
);

  logic [NUM_LINKS-1:0]                  link_sync, s12_v, ovf;
  logic [NUM_LINKS-1:0][2:0]             s12_card;
  word_t [NUM_LINKS-1:0][NUM_PLANES-1:0] s12_data;
  logic                                  sync_all, s2_busy, s3_busy, s23_v;
  word_t [NUM_PLANES-1:0]                s2_data;
  logic                                  reg0_done;
  logic [15:0]                           reg0_bc;
  logic [7:0]                            reg0_trig;

  assign sync_all = &link_sync;

  for (genvar l = 0; l < NUM_LINKS; l++) begin : g_link
    logic [NUM_LOC-1:0]            loc_done;
    logic [NUM_LOC-1:0][3:0]       loc_id, loc_fired;
    logic [NUM_LOC-1:0][15:0]      loc_bc;
    logic [NUM_LOC-1:0][3:0][15:0] loc_bp, loc_nbp;
    logic        reg_done, rh_done;
    logic [3:0]  reg_id;
    logic [7:0]  reg_trig;
    logic [15:0] reg_bc;
    logic [NUM_LOC-1:0] rfmt_v, lane_mask;
    o2_word_t [NUM_LOC-1:0][NUM_PLANES-1:0] rfmt_data;

    mid_data_extraction u_extract (
      .clk_i, .rst_n_i,
      .is_valid_i(is_valid_i[l]), .is_data_i(is_data_i[l]), .data_i(data_i[l]),
      .loc_done_o(loc_done), .loc_id_o(loc_id), .loc_fired_o(loc_fired),
      .loc_bc_o(loc_bc), .loc_bp_o(loc_bp), .loc_nbp_o(loc_nbp),
      .reg_done_o(reg_done), .reg_id_o(reg_id), .reg_trigger_o(reg_trig),
      .reg_bc_o(reg_bc), .rh_done_o(rh_done)
    );

    mid_reformat u_rfmt (
      .clk_i, .rst_n_i,
      .loc_done_i(loc_done), .loc_id_i(loc_id), .loc_fired_i(loc_fired),
      .loc_bp_i(loc_bp), .loc_nbp_i(loc_nbp), .reg_id_i(reg_id),
      .gbt_rfmt_data_v_o(rfmt_v), .gbt_rfmt_data_o(rfmt_data)
    );

    mid_zs_mask #(.LINK(l)) u_zs (
      .clk_i, .rst_n_i, .gbt_fault_i(gbt_fault_i[l]), .lane_mask_o(lane_mask)
    );

    mid_fifo_2d #(.FIFO_DEPTH(FIFO_DEPTH)) u_fifo2d (
      .clk_i, .rst_n_i,
      .gbt_rfmt_data_v_i(rfmt_v), .gbt_rfmt_data_i(rfmt_data),
      .lane_mask_i(lane_mask), .sync_all_i(sync_all), .gbt_s2_busy_i(s2_busy),
      .gbt_fifo_sync_o(link_sync[l]), .gbt_fifo_data_v_o(s12_v[l]),
      .gbt_fifo_card_o(s12_card[l]), .gbt_fifo_data_o(s12_data[l]),
      .gbt_fifo_overflow_o(ovf[l])
    );

    if (l == 0) begin : g_hb
      assign reg0_done = reg_done;
      assign reg0_bc   = reg_bc;
      assign reg0_trig = reg_trig;
    end
  end

  mid_s2_readout u_s2 (
    .clk_i, .rst_n_i,
    .s12_data_v_i(s12_v), .s12_card_i(s12_card), .s12_data_i(s12_data),
    .s2_s3_busy_i(s3_busy), .s2_s3_busy_o(s2_busy),
    .s23_data_v_o(s23_v), .s2_ram_data_o(s2_data)
  );

  mid_s3_readout u_s3 (
    .clk_i, .rst_n_i,
    .s23_data_v_i(s23_v), .s2_ram_data_i(s2_data),
    .s3_busy_o(s3_busy), .s3_ram_data_v_o(s3_ram_data_v_o),
    .s3_ram_data_o(s3_ram_data_o), .s3_dummy_o(s3_dummy_o)
  );

  mid_hbid_tracker #(.HBID_W(32)) u_hbid (
    .clk_i, .rst_n_i, .valid_i(reg0_done), .bc_i(reg0_bc), .trigger_i(reg0_trig),
    .hbid_o(hbid_o), .trigger_o(trigger_o), .new_hbf_o(new_hbf_o)
  );

  assign s3_busy_o       = s3_busy;
  assign s2_busy_o       = s2_busy;
  assign sync_o          = sync_all;
  assign fifo_overflow_o = |ovf;

endmodule
