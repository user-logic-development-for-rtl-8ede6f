// mid_zs_mask: zero-suppression lane mask of one GBT link.
//
// A lane that will never deliver a frame would hold the 2-D FIFO out of
// synchronisation forever, so its FIFOs are masked: the readout controller
// treats them as full and emits dummy words, which Stage 3 rejects. A lane is
// masked when the CRU core reports the link broken or faulty (gbt_fault_i,
// the proposed extra input) or when the detector map has no local card in
// that slot: link LINK carries local IDs 8*(LINK mod 2) .. +7 of regional
// crate LINK/2, and crates 2, 3 and 7 are not fully equipped.
// The mask is registered (one clock after gbt_fault_i changes).
module mid_zs_mask
  import mid_pkg::*;
#(
  parameter int unsigned LINK = 0
) (
  input  logic               clk_i,
  input  logic               rst_n_i,
  input  logic               gbt_fault_i,
  output logic [NUM_LOC-1:0] lane_mask_o
);

  function automatic logic [NUM_LOC-1:0] absent_lanes();
    logic [NUM_LOC-1:0] m;
    for (int unsigned k = 0; k < NUM_LOC; k++)
      m[k] = (crate_card(LINK / 2, (LINK % 2) * NUM_LOC + k) == 0);
    return m;
  endfunction

  localparam logic [NUM_LOC-1:0] ABSENT = absent_lanes();

  always_ff @(posedge clk_i or negedge rst_n_i) begin
    if (!rst_n_i) lane_mask_o <= ABSENT;
    else          lane_mask_o <= ABSENT | {NUM_LOC{gbt_fault_i}};
  end

endmodule
