// mid_data_extraction: data extraction for one GBT link.
//
// The 80-bit GBT word holds ten byte lanes: local cards LC0-LC3 in bytes 0-3,
// the low regional link RL in byte 4, local cards LC4-LC7 in bytes 5-8 and
// the high regional link RH in byte 9 (the lane order of the front-end
// protocol, read from the most significant byte down). A lane is sampled
// only while is_valid and is_data are both high, and each lane starts a
// frame on its own when it sees a valid status byte (start bit set), so the
// lanes need not be aligned. Each byte is stored in its register on the
// clock it is sampled (no added latency); each local card keeps 9 registers
// (status, trigger, bunch counter, card ID, fired planes, and one 32-bit
// strip register per plane). The regional ID, trigger and bunch counter are
// taken from the RL lane; RH frames are captured and checked the same way
// but only their done pulse is brought out.
// Interface: loc_done_o[k] pulses one clock after the last byte of local
// card k's frame; the data outputs are stable from then until that lane
// starts its next frame's strip bytes.
module mid_data_extraction
  import mid_pkg::*;
(
  input  logic             clk_i,
  input  logic             rst_n_i,
  input  logic             is_valid_i,
  input  logic             is_data_i,
  input  logic [GBT_W-1:0] data_i,
  // local cards
  output logic [NUM_LOC-1:0]        loc_done_o,
  output logic [NUM_LOC-1:0][3:0]   loc_id_o,
  output logic [NUM_LOC-1:0][3:0]   loc_fired_o,
  output logic [NUM_LOC-1:0][15:0]  loc_bc_o,
  output logic [NUM_LOC-1:0][3:0][15:0] loc_bp_o,
  output logic [NUM_LOC-1:0][3:0][15:0] loc_nbp_o,
  // regional card (RL lane) and RH lane
  output logic             reg_done_o,
  output logic [3:0]       reg_id_o,
  output logic [7:0]       reg_trigger_o,
  output logic [15:0]      reg_bc_o,
  output logic             rh_done_o
);

  logic sample;
  assign sample = is_valid_i & is_data_i;

  for (genvar k = 0; k < NUM_LOC; k++) begin : g_loc
    localparam int unsigned LANE = (k < 4) ? k : k + 1;
    logic [7:0] st, tr;
    logic       bsy;
    mid_frame_parser #(.LOCAL(1'b1)) u_lane (
      .clk_i, .rst_n_i, .sample_i(sample), .byte_i(data_i[8*LANE +: 8]),
      .done_o(loc_done_o[k]), .busy_o(bsy), .status_o(st), .trigger_o(tr),
      .bc_o(loc_bc_o[k]), .id_o(loc_id_o[k]), .fired_o(loc_fired_o[k]),
      .bp_o(loc_bp_o[k]), .nbp_o(loc_nbp_o[k])
    );
  end

  logic [7:0] rl_status, rh_status, rh_trig;
  logic [15:0] rh_bc;
  logic [3:0]  rh_id, rl_fired, rh_fired;
  logic [3:0][15:0] rl_bp, rl_nbp, rh_bp, rh_nbp;
  logic rl_busy, rh_busy;

  mid_frame_parser #(.LOCAL(1'b0)) u_rl (
    .clk_i, .rst_n_i, .sample_i(sample), .byte_i(data_i[8*4 +: 8]),
    .done_o(reg_done_o), .busy_o(rl_busy), .status_o(rl_status), .trigger_o(reg_trigger_o),
    .bc_o(reg_bc_o), .id_o(reg_id_o), .fired_o(rl_fired), .bp_o(rl_bp), .nbp_o(rl_nbp)
  );

  mid_frame_parser #(.LOCAL(1'b0)) u_rh (
    .clk_i, .rst_n_i, .sample_i(sample), .byte_i(data_i[8*9 +: 8]),
    .done_o(rh_done_o), .busy_o(rh_busy), .status_o(rh_status), .trigger_o(rh_trig),
    .bc_o(rh_bc), .id_o(rh_id), .fired_o(rh_fired), .bp_o(rh_bp), .nbp_o(rh_nbp)
  );

endmodule
