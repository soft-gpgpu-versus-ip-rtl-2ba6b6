// shared_memory: the SM's four-bank shared memory (4 read ports, and either
// one write port or four "virtual" write ports).
//
// Each of the four banks has its own read address, write address and write
// data, all coming from the SP-side muxes (read_addr_mux, write_port_mux).
// In the standard format those muxes give all four banks the same write, so
// every bank holds a full copy (4R-1W).  With save_bank they give each bank a
// different SP's value, four writes in one cycle; such an address is then
// valid only in the bank that the reading SP (index mod 4) is wired to.
// The memory itself does not know which format an address holds.
//
// In front of each bank sit the muxes to the global (host) port, whose
// names follow the architecture figure: a host write (global_wr_en) goes to
// all four banks at global_wr_addr and overrides an SM write in that cycle;
// the read address of every bank is global_rd_addr unless rd_en_to_shr
// selects the SM addresses.  data_out[b] is bank b's read data, two edges
// after the address.  The override priority and rd_en_to_shr are this
// design's choices.
module shared_memory #(
  parameter int NUM_BANKS = 4,
  parameter int DEPTH     = 16384,
  parameter int WIDTH     = 32,
  parameter int AW        = $clog2(DEPTH)
) (
  input  logic             clk,
  // SM side
  input  logic [WIDTH-1:0] data_to_shr    [NUM_BANKS],
  input  logic [AW-1:0]    wr_addr_to_shr [NUM_BANKS],
  input  logic [AW-1:0]    rd_addr_to_shr [NUM_BANKS],
  input  logic             we_to_shr,
  input  logic             rd_en_to_shr,
  // global (host) side
  input  logic [WIDTH-1:0] global_data_in,
  input  logic [AW-1:0]    global_wr_addr,
  input  logic [AW-1:0]    global_rd_addr,
  input  logic             global_wr_en,
  output logic [WIDTH-1:0] data_out [NUM_BANKS]
);

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    logic             we;
    logic [AW-1:0]    waddr, raddr;
    logic [WIDTH-1:0] wdata;

    always_comb begin
      we    = we_to_shr | global_wr_en;
      waddr = global_wr_en ? global_wr_addr : wr_addr_to_shr[b];
      wdata = global_wr_en ? global_data_in : data_to_shr[b];
      raddr = rd_en_to_shr ? rd_addr_to_shr[b] : global_rd_addr;
    end

    shmem_bank #(.DEPTH(DEPTH), .WIDTH(WIDTH), .AW(AW)) u_bank (
      .clk   (clk),
      .we    (we),
      .waddr (waddr),
      .wdata (wdata),
      .raddr (raddr),
      .rdata (data_out[b])
    );
  end

endmodule
