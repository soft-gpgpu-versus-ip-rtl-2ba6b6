// coeff_cache: local coefficient cache of one SP's complex functional unit.
//
// Holds one complex value (real, imaginary) per thread row of the SP, in two
// small RAMs side by side.  lod_coeff writes the two register-file read
// ports into it; mul_real / mul_imag then use the stored twiddle factor
// without a third and fourth register read port.  Both addresses are the
// thread index: the read address is the current thread index, the write
// address and write enable are the thread index and lod delayed by two
// cycles, which is when the register file delivers the operands of that
// instruction.  The read is continuous, address and output registered, so
// tw_re/tw_im show the entry of thread_index two edges later.
// ce (set by coeff_en, cleared by coeff_dis) is the clock enable of every
// register and RAM write in the cache; while it is low the cache holds.
// The two-cycle write delay and the clock-enable gating follow the paper;
// the read registers are this design's choice.
module coeff_cache #(
  parameter int DEPTH = 256,
  parameter int WIDTH = 32,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ce,
  input  logic [AW-1:0]    thread_index,
  input  logic             lod,
  input  logic [WIDTH-1:0] wdata_re,
  input  logic [WIDTH-1:0] wdata_im,
  output logic [WIDTH-1:0] tw_re,
  output logic [WIDTH-1:0] tw_im
);

  logic [WIDTH-1:0] mem_re [DEPTH];
  logic [WIDTH-1:0] mem_im [DEPTH];
  logic [AW-1:0]    waddr_d1, waddr_d2, raddr_q;
  logic             lod_d1, lod_d2;

  // Write address pipeline: thread_index delayed by two registers.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      waddr_d1 <= '0;
      waddr_d2 <= '0;
      lod_d1   <= 1'b0;
      lod_d2   <= 1'b0;
    end else if (ce) begin
      waddr_d1 <= thread_index;
      waddr_d2 <= waddr_d1;
      lod_d1   <= lod;
      lod_d2   <= lod_d1;
    end
  end

  always_ff @(posedge clk) begin
    if (ce) begin
      if (lod_d2) begin
        mem_re[waddr_d2] <= wdata_re;
        mem_im[waddr_d2] <= wdata_im;
      end
      raddr_q <= thread_index;
      tw_re   <= mem_re[raddr_q];
      tw_im   <= mem_im[raddr_q];
    end
  end

endmodule
