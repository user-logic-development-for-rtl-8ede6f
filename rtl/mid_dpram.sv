// mid_dpram: true dual-port RAM (S2 RAM), DEPTH x WIDTH.
//
// Two independent ports, each with write enable, address, write data and a
// registered read (read data valid one clock after the address). Writing the
// same address from both ports in one clock is not allowed (checked by an
// assertion). Used with 16 words x 64 bits per regional crate per plane:
// one GBT link fills addresses 0-7, its partner link fills 8-15.
module mid_dpram #(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned WIDTH = 64,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk_i,
  input  logic             a_we_i,
  input  logic [AW-1:0]    a_addr_i,
  input  logic [WIDTH-1:0] a_wdata_i,
  output logic [WIDTH-1:0] a_rdata_o,
  input  logic             b_we_i,
  input  logic [AW-1:0]    b_addr_i,
  input  logic [WIDTH-1:0] b_wdata_i,
  output logic [WIDTH-1:0] b_rdata_o
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk_i) begin
    if (a_we_i) mem[a_addr_i] <= a_wdata_i;
    if (b_we_i) mem[b_addr_i] <= b_wdata_i;
    a_rdata_o <= mem[a_addr_i];
    b_rdata_o <= mem[b_addr_i];
  end

  assert property (@(posedge clk_i) !(a_we_i && b_we_i && a_addr_i == b_addr_i));

endmodule
