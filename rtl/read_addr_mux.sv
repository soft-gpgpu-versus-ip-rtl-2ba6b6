// read_addr_mux: the 16:4 read address mux between the SPs and the four
// shared-memory read ports.
//
// A load is served for four SPs per cycle, so a row of 16 threads takes four
// cycles.  In cycle "group" g the load addresses of SPs 4g..4g+3 go to banks
// 0..3: bank j is always read for SPs j, j+4, j+8 and j+12, and its
// data_out is wired back to exactly those SPs.  That fixed bank-to-SP
// mapping is what lets save_bank data be read back.  Purely combinational.
module read_addr_mux #(
  parameter int NUM_SP    = 16,
  parameter int NUM_BANKS = 4,
  parameter int AW        = 14,
  parameter int GW        = $clog2(NUM_SP / NUM_BANKS)
) (
  input  logic [AW-1:0] sp_addr        [NUM_SP],
  input  logic [GW-1:0] group,
  output logic [AW-1:0] rd_addr_to_shr [NUM_BANKS]
);

  always_comb begin
    for (int j = 0; j < NUM_BANKS; j++) begin
      rd_addr_to_shr[j] = sp_addr[int'(group) * NUM_BANKS + j];
    end
  end

endmodule
