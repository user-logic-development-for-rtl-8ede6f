// mid_s2_readout: Stage 2 readout - merge per regional crate.
//
// Holds one dual-port S2 RAM (16 x 64) per regional crate per plane, 32 in
// all. During a Stage 1 burst (s12_data_v_i high) the even link of crate c
// writes its 8 words per plane through port A into addresses 0-7 (the low
// half) and the odd link through port B into addresses 8-15 (the high half),
// at the address of the lane each word came from. The first valid clock sets
// s2_s3_busy_o, which holds Stage 1 off. When the burst has ended and Stage 3
// is not busy (s2_s3_busy_i low), the RAMs are read through port A: the four
// planes in parallel, 128 words each, crate 0 local 0 first up to crate 7
// local 15, with s23_data_v_o high for the 128 clocks. With the last word
// s2_s3_busy_o drops and the next payload may enter.
// Timing: busy rises one clock after the first s12_data_v_i; the 128-word
// burst starts two clocks after Stage 3 is seen idle (one clock for the
// state change, one for the registered RAM read) and lasts 128 clocks.
module mid_s2_readout
  import mid_pkg::*;
(
  input  logic clk_i,
  input  logic rst_n_i,
  input  logic [NUM_LINKS-1:0]                   s12_data_v_i,
  input  logic [NUM_LINKS-1:0][2:0]              s12_card_i,
  input  word_t [NUM_LINKS-1:0][NUM_PLANES-1:0]  s12_data_i,
  input  logic                                   s2_s3_busy_i,   // Stage 3 busy
  output logic                                   s2_s3_busy_o,   // Stage 2 busy
  output logic                                   s23_data_v_o,
  output word_t [NUM_PLANES-1:0]                 s2_ram_data_o
);

  typedef enum logic [2:0] {S_IDLE, S_FILL, S_WAIT, S_SEND, S_LAST} state_t;
  state_t     state;
  logic [6:0] rcnt;          // {crate, local} read address
  logic       rd_en;
  logic [2:0] crate_q;       // crate of the word in the RAM output register
  logic       rd_v_q;
  logic       any_v;

  assign any_v = |s12_data_v_i;
  assign rd_en = (state == S_SEND);

  word_t [NUM_CRATES-1:0][NUM_PLANES-1:0] rdata;

  for (genvar c = 0; c < NUM_CRATES; c++) begin : g_crate
    for (genvar p = 0; p < NUM_PLANES; p++) begin : g_plane
      word_t unused_b;
      mid_dpram #(.DEPTH(CRATE_CARDS), .WIDTH(WORD_W)) u_ram (
        .clk_i,
        .a_we_i   (s12_data_v_i[2*c] & ~rd_en),
        .a_addr_i (rd_en ? rcnt[3:0] : {1'b0, s12_card_i[2*c]}),
        .a_wdata_i(s12_data_i[2*c][p]),
        .a_rdata_o(rdata[c][p]),
        .b_we_i   (s12_data_v_i[2*c+1] & ~rd_en),
        .b_addr_i ({1'b1, s12_card_i[2*c+1]}),
        .b_wdata_i(s12_data_i[2*c+1][p]),
        .b_rdata_o(unused_b)
      );
    end
  end

  always_ff @(posedge clk_i or negedge rst_n_i) begin
    if (!rst_n_i) begin
      state        <= S_IDLE;
      rcnt         <= '0;
      s2_s3_busy_o <= 1'b0;
      crate_q      <= '0;
      rd_v_q       <= 1'b0;
    end else begin
      rd_v_q  <= rd_en;
      crate_q <= rcnt[6:4];
      unique case (state)
        S_IDLE: if (any_v) begin
          state        <= S_FILL;
          s2_s3_busy_o <= 1'b1;
        end
        S_FILL: if (!any_v) state <= S_WAIT;
        S_WAIT: if (!s2_s3_busy_i) begin
          state <= S_SEND;
          rcnt  <= '0;
        end
        S_SEND: begin
          rcnt <= rcnt + 7'd1;
          if (rcnt == 7'd127) state <= S_LAST;
        end
        S_LAST: begin            // last word leaves the RAM output register
          state        <= S_IDLE;
          s2_s3_busy_o <= 1'b0;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign s23_data_v_o  = rd_v_q;
  assign s2_ram_data_o = rdata[crate_q];

  // Stage 1 must not send while Stage 2 is reading out.
  assert property (@(posedge clk_i) disable iff (!rst_n_i) any_v |-> state inside {S_IDLE, S_FILL});

endmodule
