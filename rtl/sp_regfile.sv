// sp_regfile: register file of one SP, two read ports and one write port.
//
// DEPTH 32-bit registers (2048: 32K registers over 16 SPs), addressed as
// thread row * 64 + register.  Both read ports register the address and the
// data, so a read returns two clock edges after its address, the same delay
// the coefficient cache applies to the thread index for its writes.  A read
// whose address is presented in the cycle of a write to the same register
// returns the new value.
// Two read ports (built in an FPGA as two RAM copies) are this design's
// reading of the architecture figure.
module sp_regfile #(
  parameter int DEPTH = 2048,
  parameter int WIDTH = 32,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic [AW-1:0]    raddr_a,
  input  logic [AW-1:0]    raddr_b,
  output logic [WIDTH-1:0] rdata_a,
  output logic [WIDTH-1:0] rdata_b,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    ra_q, rb_q;

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    ra_q    <= raddr_a;
    rb_q    <= raddr_b;
    rdata_a <= mem[ra_q];
    rdata_b <= mem[rb_q];
  end

endmodule
