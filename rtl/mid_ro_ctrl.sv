// mid_ro_ctrl: readout controller (RO_CTRL) of one plane of a 2-D FIFO.
//
// It watches the EMPTY flags of the plane's 8 LOC FIFOs. sync_o is the local
// AND: high when every lane holds at least one word, a lane in mask_i
// (broken link or unequipped card slot) counting as full. A start_i pulse
// then reads the 8 lanes one per clock, lane 7 first down to lane 0 (the
// order of the published synchronisation waveform). A masked lane is not
// popped; a word with only the dummy bit set is sent in its place.
// Timing: start_i in clock t pops lane 7 in t, data_o/valid_o/card_o carry
// it in t+1, lane 0 in t+8; busy_o is high for the 8 read clocks.
module mid_ro_ctrl
  import mid_pkg::*;
(
  input  logic                    clk_i,
  input  logic                    rst_n_i,
  input  logic [NUM_LOC-1:0]      empty_i,
  input  word_t [NUM_LOC-1:0]     data_i,
  input  logic [NUM_LOC-1:0]      mask_i,
  input  logic                    start_i,
  output logic [NUM_LOC-1:0]      rd_o,
  output logic                    sync_o,
  output logic                    busy_o,
  output logic                    valid_o,
  output logic [2:0]              card_o,
  output word_t                   data_o
);

  logic       active;
  logic [2:0] idx;        // lane being read
  logic       go;
  logic [2:0] lane;

  assign sync_o = &(~empty_i | mask_i);
  assign go     = start_i | active;
  assign lane   = active ? idx : 3'(NUM_LOC-1);
  assign busy_o = active;

  always_comb begin
    rd_o = '0;
    if (go && !mask_i[lane]) rd_o[lane] = 1'b1;
  end

  always_ff @(posedge clk_i or negedge rst_n_i) begin
    if (!rst_n_i) begin
      active  <= 1'b0;
      idx     <= '0;
      valid_o <= 1'b0;
      card_o  <= '0;
      data_o  <= '0;
    end else begin
      valid_o <= go;
      if (go) begin
        card_o <= lane;
        data_o <= mask_i[lane] ? word_t'(1) << DUMMY_BIT : data_i[lane];
        if (lane == 3'd0) active <= 1'b0;
        else begin
          active <= 1'b1;
          idx    <= lane - 3'd1;
        end
      end
    end
  end

  // A start while a read sequence runs would be lost.
  assert property (@(posedge clk_i) disable iff (!rst_n_i) start_i |-> !active);

endmodule
