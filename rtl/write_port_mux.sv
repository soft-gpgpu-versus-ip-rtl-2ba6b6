// write_port_mux: two-level mux from the 16 SPs to the four bank write
// ports; one instance carries write data, another write addresses.
//
// Level 1 has four 4-input muxes: mux j picks SP 4*sel[3:2]+j.  Level 2
// picks one of those by sel[1:0].  Bank 0 always takes the level-2 output;
// banks 1..3 take either the level-2 output (standard save: one SP's word
// is written to all four banks, so sel is that SP's index) or their own
// level-1 output (bank_mode, save_bank: SP 4g+j writes bank j, sel = {g,00},
// four different words per cycle).  The mux tree follows the enlarged inset
// of the architecture figure; the assignment of SPs to level-1 muxes is this
// design's choice, made so that SPs j, j+4, j+8, j+12 write bank j.
// Combinational.
module write_port_mux #(
  parameter int NUM_SP = 16,
  parameter int W      = 32
) (
  input  logic [W-1:0] d [NUM_SP],
  input  logic [3:0]   sel,
  input  logic         bank_mode,
  output logic [W-1:0] q [4]
);

  logic [W-1:0] l1 [4];
  logic [W-1:0] l2;

  always_comb begin
    for (int j = 0; j < 4; j++) l1[j] = d[int'(sel[3:2]) * 4 + j];
    l2   = l1[sel[1:0]];
    q[0] = l2;
    for (int j = 1; j < 4; j++) q[j] = bank_mode ? l1[j] : l2;
  end

endmodule
