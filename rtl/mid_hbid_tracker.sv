// mid_hbid_tracker: heartbeat ID derived from the FEE internal bunch counter.
//
// The front end counts bunches inside each heartbeat frame but does not send
// the heartbeat count. Each dataset's bunch counter (bc_i, with valid_i) is
// compared with the previous one; a value that is not larger means the
// counter was reset, i.e. a new heartbeat frame began, and hbid_o is
// incremented (new_hbf_o pulses). The dataset's trigger byte is held in
// trigger_o for the raw data header. The first dataset after reset starts
// frame HBID_INIT without incrementing.
// Timing: outputs update one clock after valid_i.
module mid_hbid_tracker #(
  parameter int unsigned HBID_W    = 32,
  parameter int unsigned HBID_INIT = 0
) (
  input  logic              clk_i,
  input  logic              rst_n_i,
  input  logic              valid_i,
  input  logic [15:0]       bc_i,
  input  logic [7:0]        trigger_i,
  output logic [HBID_W-1:0] hbid_o,
  output logic [7:0]        trigger_o,
  output logic              new_hbf_o
);

  logic [15:0] last_bc;
  logic        seen;

  always_ff @(posedge clk_i or negedge rst_n_i) begin
    if (!rst_n_i) begin
      last_bc   <= '0;
      seen      <= 1'b0;
      hbid_o    <= HBID_W'(HBID_INIT);
      trigger_o <= '0;
      new_hbf_o <= 1'b0;
    end else begin
      new_hbf_o <= 1'b0;
      if (valid_i) begin
        seen      <= 1'b1;
        last_bc   <= bc_i;
        trigger_o <= trigger_i;
        if (seen && bc_i <= last_bc) begin
          hbid_o    <= hbid_o + 1'b1;
          new_hbf_o <= 1'b1;
        end
      end
    end
  end

endmodule
