// mid_s3_readout: Stage 3 readout - merge the four planes into one stream.
//
// Four single-port S3 RAMs of 128 x 64 bits, one per plane. A Stage 2 burst
// (s23_data_v_i) is written into all four in parallel at addresses 0..127;
// its first clock sets s3_busy_o, which keeps Stage 2 from starting another
// burst. When the burst ends the RAMs are read out one after the other,
// MT11, MT12, MT21 then MT22, each from address 0 to 127, one word per clock
// on the single 64-bit bus s3_ram_data_o. Words carrying the dummy bit are
// rejected: s3_ram_data_v_o stays low for them, so only real card data is
// marked valid. After the 512th read s3_busy_o drops.
// Timing: busy rises one clock after the first s23_data_v_i; reading starts
// the clock after the burst ends, data appears one clock after its address
// (registered RAM read) and the readout takes 512 clocks.
module mid_s3_readout
  import mid_pkg::*;
#(
  parameter int unsigned DEPTH = NUM_CRATES * CRATE_CARDS
) (
  input  logic                   clk_i,
  input  logic                   rst_n_i,
  input  logic                   s23_data_v_i,
  input  word_t [NUM_PLANES-1:0] s2_ram_data_i,
  output logic                   s3_busy_o,
  output logic                   s3_ram_data_v_o,
  output word_t                  s3_ram_data_o,
  output logic                   s3_dummy_o        // word on the bus was rejected
);

  localparam int unsigned AW = $clog2(DEPTH);

  typedef enum logic [1:0] {S_IDLE, S_WRITE, S_READ} state_t;
  state_t      state;
  logic [AW-1:0] waddr, raddr;
  logic [1:0]  rplane, rplane_q;
  logic        rd_q;
  logic        rd;

  word_t [NUM_PLANES-1:0] rdata;
  assign rd = (state == S_READ);

  for (genvar p = 0; p < NUM_PLANES; p++) begin : g_plane
    mid_spram #(.DEPTH(DEPTH), .WIDTH(WORD_W)) u_ram (
      .clk_i,
      .we_i   (s23_data_v_i & ~rd),
      .addr_i (rd ? raddr : waddr),
      .wdata_i(s2_ram_data_i[p]),
      .rdata_o(rdata[p])
    );
  end

  always_ff @(posedge clk_i or negedge rst_n_i) begin
    if (!rst_n_i) begin
      state     <= S_IDLE;
      waddr     <= '0;
      raddr     <= '0;
      rplane    <= '0;
      rplane_q  <= '0;
      rd_q      <= 1'b0;
      s3_busy_o <= 1'b0;
    end else begin
      rd_q     <= rd;
      rplane_q <= rplane;
      unique case (state)
        S_IDLE: if (s23_data_v_i) begin
          state     <= S_WRITE;
          s3_busy_o <= 1'b1;
          waddr     <= AW'(1);
        end
        S_WRITE: begin
          if (s23_data_v_i) waddr <= waddr + 1'b1;
          else begin
            state  <= S_READ;
            waddr  <= '0;   // the next burst's first word goes to address 0
            raddr  <= '0;
            rplane <= '0;
          end
        end
        S_READ: begin
          raddr <= raddr + 1'b1;
          if (raddr == AW'(DEPTH-1)) begin
            rplane <= rplane + 2'd1;
            if (rplane == 2'(NUM_PLANES-1)) begin
              state     <= S_IDLE;
              s3_busy_o <= 1'b0;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign s3_ram_data_o   = rdata[rplane_q];
  assign s3_dummy_o      = rd_q & rdata[rplane_q][DUMMY_BIT];
  assign s3_ram_data_v_o = rd_q & ~rdata[rplane_q][DUMMY_BIT];

  assert property (@(posedge clk_i) disable iff (!rst_n_i) s23_data_v_i |-> state != S_READ);

endmodule
