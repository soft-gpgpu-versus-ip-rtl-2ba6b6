// shmem_bank: one bank of the SM's shared memory.
//
// A one-write, one-read RAM of DEPTH x WIDTH words, in the style of an FPGA
// block RAM with both its address register and its output register used:
// rdata shows the word at raddr two clock edges after raddr is presented.
// A write is taken at the clock edge where we is high.  A read whose address
// is presented in the cycle of a write to it returns the new word.  Four of these form
// the shared memory; in the standard format all four hold the same data,
// after a save_bank each address is valid in one bank only.
// The 64 KB size (16384 words) follows the paper's configuration; latency
// and read-during-write behaviour are this design's choices.
module shmem_bank #(
  parameter int DEPTH = 16384,
  parameter int WIDTH = 32,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    raddr_q;

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    raddr_q <= raddr;
    rdata   <= mem[raddr_q];
  end

endmodule
