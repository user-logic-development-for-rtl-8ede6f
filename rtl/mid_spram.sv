// mid_spram: single-port RAM (S3 RAM), DEPTH x WIDTH.
//
// One port: write when we_i, otherwise read; read data is registered and
// valid one clock after the address. Used as 128 words x 64 bits per plane.
module mid_spram #(
  parameter int unsigned DEPTH = 128,
  parameter int unsigned WIDTH = 64,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk_i,
  input  logic             we_i,
  input  logic [AW-1:0]    addr_i,
  input  logic [WIDTH-1:0] wdata_i,
  output logic [WIDTH-1:0] rdata_o
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk_i) begin
    if (we_i) mem[addr_i] <= wdata_i;
    else      rdata_o     <= mem[addr_i];
  end

endmodule
