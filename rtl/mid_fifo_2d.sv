// mid_fifo_2d: 2-D FIFO of one GBT link - data synchronisation and Stage 1
// readout.
//
// An array of 4 x 8 LOC FIFOs (one per plane per local card) takes the
// reformatted words; lane k's four plane words are written together on
// gbt_rfmt_data_v_i[k]. Each plane's RO_CTRL forms the local AND of its
// lanes' non-empty flags and gbt_fifo_sync_o is their AND for the link. The
// top ANDs the 16 links into sync_all_i. When sync_all_i is high and Stage 2
// is not busy, the four planes are read in parallel, 8 lanes in 8 clocks,
// each plane on its own 64-bit bus with one shared valid. Lanes in
// lane_mask_i are bypassed with dummy words (zero suppression).
// Timing: start in clock t when sync_all_i & ~gbt_s2_busy_i & idle; words on
// gbt_fifo_data_o in t+1..t+8 (lane 7 first) with gbt_fifo_card_o = lane.
module mid_fifo_2d
  import mid_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 64
) (
  input  logic clk_i,
  input  logic rst_n_i,
  input  logic [NUM_LOC-1:0]                     gbt_rfmt_data_v_i,
  input  o2_word_t [NUM_LOC-1:0][NUM_PLANES-1:0] gbt_rfmt_data_i,
  input  logic [NUM_LOC-1:0]                     lane_mask_i,
  input  logic                                   sync_all_i,
  input  logic                                   gbt_s2_busy_i,
  output logic                                   gbt_fifo_sync_o,
  output logic                                   gbt_fifo_data_v_o,
  output logic [2:0]                             gbt_fifo_card_o,
  output word_t [NUM_PLANES-1:0]                 gbt_fifo_data_o,
  output logic                                   gbt_fifo_overflow_o
);

  logic [NUM_PLANES-1:0] plane_sync, plane_busy, plane_v;
  logic [NUM_PLANES-1:0][2:0] plane_card;
  logic [NUM_PLANES-1:0][NUM_LOC-1:0] ovf;
  logic start;

  assign gbt_fifo_sync_o = &plane_sync;
  assign start = sync_all_i & ~gbt_s2_busy_i & ~plane_busy[0];

  for (genvar p = 0; p < NUM_PLANES; p++) begin : g_plane
    logic  [NUM_LOC-1:0] empty, rd, full;
    word_t [NUM_LOC-1:0] dout;
    for (genvar k = 0; k < NUM_LOC; k++) begin : g_lane
      mid_loc_fifo #(.DEPTH(FIFO_DEPTH), .WIDTH(WORD_W)) u_fifo (
        .clk_i, .rst_n_i,
        .wr_i(gbt_rfmt_data_v_i[k] & ~lane_mask_i[k]),
        .data_rx_i(gbt_rfmt_data_i[k][p]),
        .rd_i(rd[k]), .data_tx_o(dout[k]),
        .empty_o(empty[k]), .full_o(full[k]), .overflow_o(ovf[p][k])
      );
    end
    mid_ro_ctrl u_ro (
      .clk_i, .rst_n_i, .empty_i(empty), .data_i(dout), .mask_i(lane_mask_i),
      .start_i(start), .rd_o(rd), .sync_o(plane_sync[p]), .busy_o(plane_busy[p]),
      .valid_o(plane_v[p]), .card_o(plane_card[p]), .data_o(gbt_fifo_data_o[p])
    );
  end

  // All four planes run in lockstep; plane 0 speaks for them.
  assign gbt_fifo_data_v_o   = plane_v[0];
  assign gbt_fifo_card_o     = plane_card[0];
  assign gbt_fifo_overflow_o = |ovf;

endmodule
