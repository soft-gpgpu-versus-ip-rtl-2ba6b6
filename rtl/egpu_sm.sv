// egpu_sm: one streaming multiprocessor of the soft GPGPU, in its
// virtual-banked, complex-arithmetic form.
//
// Sixteen SPs (sp_core) run the instructions issued by the sequencer, each
// for one thread of the current row.  They share a four-bank memory
// (shared_memory).  A load reads four SPs per cycle through the 16:4
// read_addr_mux; bank j returns data to SPs j, j+4, j+8 and j+12.  A save
// writes one SP per cycle into all four banks (standard format); a
// save_bank writes four SPs per cycle, SP 4g+j into bank j, through the
// write_port_mux pair (data and address), which makes the memory behave as a
// 4R-4W memory for data that will next be read by the SP with the same
// index mod 4.  Each SP's complex FP unit can multiply by a twiddle factor
// held in its local coefficient cache, so a complex multiply takes three
// instructions (lod_coeff, mul_real, mul_imag) instead of six.
//
// Host interface: the instruction memory is written through imem_*, the
// shared memory through global_* (all four banks at once) and read back on
// data_out (bank b's word at global_rd_addr, two cycles later) while the SM
// is not loading.  start (with wave_rows = threads/16, and regs_log2 =
// log2 of the registers per thread, both held during the run) runs the
// program from address 0; done pulses when it has stopped and drained.
// The memory-side control is the SP-side pipeline delayed to the cycle in
// which the SPs present their addresses (three cycles after issue).
// rst_n is an asynchronous reset; it also appears as the disable condition
// of the simulation-only assertion at the end, which linters report as a
// signal used both synchronously and asynchronously.  No hardware samples it
// synchronously.
module egpu_sm
  import egpu_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  // control
  input  logic                start,
  input  logic [ROW_BITS:0]   wave_rows,
  input  logic [2:0]          regs_log2,
  output logic                busy,
  output logic                done,
  // instruction memory write port
  input  logic                imem_we,
  input  logic [PC_BITS-1:0]  imem_addr,
  input  instr_t              imem_wdata,
  // global port of the shared memory
  input  logic [DATA_W-1:0]   global_data_in,
  input  logic [SHMEM_AW-1:0] global_wr_addr,
  input  logic [SHMEM_AW-1:0] global_rd_addr,
  input  logic                global_wr_en,
  output logic [DATA_W-1:0]   data_out [NUM_BANKS]
);

  issue_t              issue;
  logic [SHMEM_AW-1:0] sp_addr  [NUM_SP];
  logic [DATA_W-1:0]   sp_wdata [NUM_SP];
  logic [SHMEM_AW-1:0] rd_addr_to_shr [NUM_BANKS];
  logic [SHMEM_AW-1:0] wr_addr_to_shr [NUM_BANKS];
  logic [DATA_W-1:0]   data_to_shr    [NUM_BANKS];

  sequencer u_seq (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (start),
    .wave_rows  (wave_rows),
    .imem_we    (imem_we),
    .imem_addr  (imem_addr),
    .imem_wdata (imem_wdata),
    .issue      (issue),
    .busy       (busy),
    .done       (done)
  );

  for (genvar k = 0; k < NUM_SP; k++) begin : g_sp
    sp_core #(.SP_ID(k)) u_sp (
      .clk       (clk),
      .rst_n     (rst_n),
      .issue     (issue),
      .regs_log2 (regs_log2),
      .mem_addr  (sp_addr[k]),
      .mem_wdata (sp_wdata[k]),
      .ld_data   (data_out[k % NUM_BANKS])
    );
  end

  // Memory-side control, aligned with the SPs' address stage (issue + 3).
  typedef struct packed {
    logic       valid;
    opcode_e    op;
    logic [3:0] sub;
  } mctl_t;

  mctl_t m1, m2, m3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m1 <= '0;
      m2 <= '0;
      m3 <= '0;
    end else begin
      m1 <= '{valid: issue.valid, op: issue.ins.op, sub: issue.sub};
      m2 <= m1;
      m3 <= m2;
    end
  end

  logic       we_to_shr, rd_en_to_shr, bank_mode;
  logic [3:0] wsel;

  always_comb begin
    rd_en_to_shr = m3.valid && (m3.op == OP_LOD);
    we_to_shr    = m3.valid && (m3.op inside {OP_SAVE, OP_SAVE_BANK});
    bank_mode    = (m3.op == OP_SAVE_BANK);
    wsel         = bank_mode ? {m3.sub[1:0], 2'b00} : m3.sub;
  end

  read_addr_mux #(.NUM_SP(NUM_SP), .NUM_BANKS(NUM_BANKS), .AW(SHMEM_AW)) u_rd_mux (
    .sp_addr        (sp_addr),
    .group          (m3.sub[1:0]),
    .rd_addr_to_shr (rd_addr_to_shr)
  );

  write_port_mux #(.NUM_SP(NUM_SP), .W(DATA_W)) u_wr_data_mux (
    .d         (sp_wdata),
    .sel       (wsel),
    .bank_mode (bank_mode),
    .q         (data_to_shr)
  );

  write_port_mux #(.NUM_SP(NUM_SP), .W(SHMEM_AW)) u_wr_addr_mux (
    .d         (sp_addr),
    .sel       (wsel),
    .bank_mode (bank_mode),
    .q         (wr_addr_to_shr)
  );

  shared_memory #(.NUM_BANKS(NUM_BANKS), .DEPTH(SHMEM_DEPTH), .WIDTH(DATA_W)) u_shmem (
    .clk            (clk),
    .data_to_shr    (data_to_shr),
    .wr_addr_to_shr (wr_addr_to_shr),
    .rd_addr_to_shr (rd_addr_to_shr),
    .we_to_shr      (we_to_shr),
    .rd_en_to_shr   (rd_en_to_shr),
    .global_data_in (global_data_in),
    .global_wr_addr (global_wr_addr),
    .global_rd_addr (global_rd_addr),
    .global_wr_en   (global_wr_en),
    .data_out       (data_out)
  );

  // Loads and save_bank serve one of the four SP groups per cycle.
  assert property (@(posedge clk) disable iff (!rst_n)
                   m3.valid && (m3.op inside {OP_LOD, OP_SAVE_BANK}) |-> m3.sub < 4'd4);

endmodule
