// mid_frame_parser: byte-lane frame capture for one front-end card.
//
// One byte lane of the GBT word carries the frames of one card, one byte per
// clock. The lane is idle until a byte with the start bit (bit 7) set arrives
// while sampling is enabled; that byte is the status byte and starts a frame.
// The next four bytes are the trigger byte, the 16-bit internal bunch counter
// (high byte first) and an ID byte holding the card ID (bits 7:4) and the
// fired-plane (tracklet) mask (bits 3:0, bit 0 = MT11 ... bit 3 = MT22).
// A local card (LOCAL=1) then sends 4 bytes per fired plane, lowest plane
// first: BP high, BP low, NBP high, NBP low. A regional card (LOCAL=0) stops
// after the ID byte. Every byte lands in its register on the clock it is
// sampled; done_o pulses for one clock after the last byte of a frame, and the
// registers hold until the next frame overwrites them. Strip registers of
// planes that did not fire are cleared at the start of each frame.
// Frame layout and the start-bit test are this design's choice; the paper
// only names the fields (status, trigger, timing, card ID, strip patterns).
module mid_frame_parser #(
  parameter bit LOCAL = 1'b1
) (
  input  logic        clk_i,
  input  logic        rst_n_i,
  input  logic        sample_i,   // lane byte is valid data this clock
  input  logic [7:0]  byte_i,
  output logic        done_o,     // frame complete (1-clock pulse)
  output logic        busy_o,     // inside a frame
  output logic [7:0]  status_o,
  output logic [7:0]  trigger_o,
  output logic [15:0] bc_o,
  output logic [3:0]  id_o,
  output logic [3:0]  fired_o,
  output logic [3:0][15:0] bp_o,
  output logic [3:0][15:0] nbp_o
);

  typedef enum logic [2:0] {S_IDLE, S_TRIG, S_BCH, S_BCL, S_ID, S_STRIP} state_t;
  state_t     state;
  logic [1:0] plane;     // plane being filled
  logic [1:0] bidx;      // byte index inside the plane's 4 bytes

  // Next fired plane strictly above p, or 4 when none.
  function automatic logic [2:0] next_fired(input logic [3:0] m, input logic [2:0] p);
    logic [2:0] r;
    r = 3'd4;
    for (int i = 3; i >= 0; i--)
      if (m[i] && 3'(i) > p) r = 3'(i);
    return r;
  endfunction

  always_ff @(posedge clk_i or negedge rst_n_i) begin
    if (!rst_n_i) begin
      state     <= S_IDLE;
      plane     <= '0;
      bidx      <= '0;
      done_o    <= 1'b0;
      status_o  <= '0;
      trigger_o <= '0;
      bc_o      <= '0;
      id_o      <= '0;
      fired_o   <= '0;
      bp_o      <= '0;
      nbp_o     <= '0;
    end else begin
      done_o <= 1'b0;
      if (sample_i) begin
        unique case (state)
          S_IDLE: if (byte_i[7]) begin
            status_o <= byte_i;
            state    <= S_TRIG;
          end
          S_TRIG: begin trigger_o <= byte_i; state <= S_BCH; end
          S_BCH:  begin bc_o[15:8] <= byte_i; state <= S_BCL; end
          S_BCL:  begin bc_o[7:0]  <= byte_i; state <= S_ID;  end
          S_ID: begin
            logic [2:0] first;
            id_o    <= byte_i[7:4];
            fired_o <= byte_i[3:0];
            first    = 3'd4;   // lowest fired plane, 4 = none
            for (int i = 3; i >= 0; i--) if (byte_i[i]) first = 3'(i);
            for (int i = 0; i < 4; i++) if (!byte_i[i]) begin
              bp_o[i]  <= '0;
              nbp_o[i] <= '0;
            end
            if (!LOCAL || first == 3'd4) begin
              state  <= S_IDLE;
              done_o <= 1'b1;
            end else begin
              plane <= first[1:0];
              bidx  <= '0;
              state <= S_STRIP;
            end
          end
          S_STRIP: begin
            unique case (bidx)
              2'd0: bp_o[plane][15:8]  <= byte_i;
              2'd1: bp_o[plane][7:0]   <= byte_i;
              2'd2: nbp_o[plane][15:8] <= byte_i;
              2'd3: nbp_o[plane][7:0]  <= byte_i;
            endcase
            bidx <= bidx + 2'd1;
            if (bidx == 2'd3) begin
              logic [2:0] nxt;
              nxt = next_fired(fired_o, {1'b0, plane});
              if (nxt == 3'd4) begin
                state  <= S_IDLE;
                done_o <= 1'b1;
              end else begin
                plane <= nxt[1:0];
              end
            end
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

  assign busy_o = (state != S_IDLE);

endmodule
