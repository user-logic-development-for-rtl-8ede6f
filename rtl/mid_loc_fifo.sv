// mid_loc_fifo: LOC FIFO, one per local card per plane.
//
// Synchronous first-word-fall-through FIFO, DEPTH words of WIDTH bits, held
// in a plain array (maps to distributed/MLAB memory). data_tx_o shows the
// oldest word whenever empty_o is low; rd_i pops it. A write while full is
// dropped and raises the sticky overflow_o. Depth 64 and width 64 are the
// sizes given for the design; full/overflow handling is this design's own.
module mid_loc_fifo #(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned WIDTH = 64
) (
  input  logic             clk_i,
  input  logic             rst_n_i,
  input  logic             wr_i,
  input  logic [WIDTH-1:0] data_rx_i,
  input  logic             rd_i,
  output logic [WIDTH-1:0] data_tx_o,
  output logic             empty_o,
  output logic             full_o,
  output logic             overflow_o
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic [AW:0]      count;
  logic             do_wr, do_rd;

  assign empty_o   = (count == '0);
  assign full_o    = (count == (AW+1)'(DEPTH));
  assign do_rd     = rd_i & ~empty_o;
  assign do_wr     = wr_i & ~full_o;
  assign data_tx_o = mem[rptr];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i) begin
    if (do_wr) mem[wptr] <= data_rx_i;
  end

  always_ff @(posedge clk_i or negedge rst_n_i) begin
    if (!rst_n_i) begin
      wptr       <= '0;
      rptr       <= '0;
      count      <= '0;
      overflow_o <= 1'b0;
    end else begin
      if (do_wr) wptr <= inc(wptr);
      if (do_rd) rptr <= inc(rptr);
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
      if (wr_i & full_o) overflow_o <= 1'b1;
    end
  end

endmodule
