// sp_core: one scalar processor (SP) of the SM.
//
// Each SP runs the instruction the sequencer issues for one thread of the
// current row (thread = row*16 + SP_ID).  It holds the thread registers
// (sp_regfile), the coefficient cache, the complex FP unit and the integer
// unit, and carries loads and stores to the shared-memory muxes.  The
// pipeline has a fixed length; relative to the issue cycle t:
//   t      register-file and coefficient-cache addresses presented
//   t+2    operands out of the register file; lod_coeff writes the cache;
//          load/store address (ra + imm) computed
//   t+3    load/store address and store data on mem_addr / mem_wdata
//   t+4    operands and cached twiddle enter complex_fu and int_alu
//   t+5    load data arrives on ld_data (bank SP_ID mod 4)
//   t+7    result written to rd at the clock edge ending this cycle
// so one instruction completes eight cycles after it issues, matching the
// 8-cycle pipeline of the architecture.  There is no interlock: as in the
// original design, hazards are avoided by the wavefront depth or by NOPs; a
// dependent instruction on the same thread must issue at least 7 cycles
// later (8 always suffices).
// An SP takes part in a load or save_bank only in the cycle whose sub-cycle
// is its group (SP_ID/4), and in a save only when sub equals SP_ID; outside
// those cycles the instruction is a bubble for it.  coeff_en / coeff_dis set
// and clear the cache clock enable (cleared at reset).
// regs_log2 (3..6) sets how many registers each thread owns; register r of
// the thread in row w is register-file word w*2^regs_log2 + r.  It must be
// held constant during a run, with wave_rows * 2^regs_log2 <= 2048.
// The stage split of the eight cycles and the load/store addressing are
// this design's choices.
module sp_core
  import egpu_pkg::*;
#(
  parameter int SP_ID = 0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  issue_t              issue,
  input  logic [2:0]          regs_log2,
  output logic [SHMEM_AW-1:0] mem_addr,
  output logic [DATA_W-1:0]   mem_wdata,
  input  logic [DATA_W-1:0]   ld_data
);

  typedef struct packed {
    logic                active;
    opcode_e             op;
    logic [REG_BITS-1:0] rd;
    logic [15:0]         imm;
    logic [ROW_BITS-1:0] row;
  } stage_t;

  stage_t      st [1:7];
  logic        active;
  logic        coeff_ce;
  logic [31:0] rf_a, rf_b;
  logic [31:0] d1_a, d1_b, d2_a, d2_b;
  logic [31:0] tw_re, tw_im, tw_re_d1, tw_im_d1, tw_re_d2, tw_im_d2;
  logic [SHMEM_AW-1:0] addr_calc;
  logic [31:0] int_y, misc_q, misc_q2, alt_q, fu_result;
  logic [31:0] ld_q;
  fu_mode_e    fu_mode;
  int_op_e     int_op;

  // Which SPs take part this cycle.
  always_comb begin
    active = 1'b0;
    if (issue.valid) begin
      case (issue.ins.op)
        OP_LOD, OP_SAVE_BANK: active = (issue.sub[1:0] == 2'(SP_ID / 4));
        OP_SAVE:              active = (issue.sub == 4'(SP_ID));
        default:              active = 1'b1;
      endcase
    end
  end

  // Control pipeline.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 1; i <= 7; i++) st[i] <= '0;
      coeff_ce <= 1'b0;
    end else begin
      st[1] <= '{active: active, op: issue.ins.op, rd: issue.ins.rd,
                 imm: issue.ins.imm, row: issue.row};
      for (int i = 2; i <= 7; i++) st[i] <= st[i-1];
      if (active && issue.ins.op == OP_COEFF_EN)  coeff_ce <= 1'b1;
      if (active && issue.ins.op == OP_COEFF_DIS) coeff_ce <= 1'b0;
    end
  end

  logic             rf_we;
  logic [RF_AW-1:0] rf_waddr;
  logic [31:0]      rf_wdata;

  sp_regfile #(.DEPTH(RF_DEPTH), .WIDTH(DATA_W)) u_rf (
    .clk     (clk),
    .raddr_a (rf_addr(issue.row, issue.ins.ra, regs_log2)),
    .raddr_b (rf_addr(issue.row, issue.ins.rb, regs_log2)),
    .rdata_a (rf_a),
    .rdata_b (rf_b),
    .we      (rf_we),
    .waddr   (rf_waddr),
    .wdata   (rf_wdata)
  );

  coeff_cache #(.DEPTH(ROWS), .WIDTH(DATA_W)) u_cache (
    .clk          (clk),
    .rst_n        (rst_n),
    .ce           (coeff_ce),
    .thread_index (issue.row),
    .lod          (active && issue.ins.op == OP_LOD_COEFF),
    .wdata_re     (rf_a),
    .wdata_im     (rf_b),
    .tw_re        (tw_re),
    .tw_im        (tw_im)
  );

  // Shared-memory address: ra + sign-extended immediate, modulo the memory size.
  assign addr_calc = rf_a[SHMEM_AW-1:0] + SHMEM_AW'({{16{st[2].imm[15]}}, st[2].imm});

  // Operand and memory-request registers.
  always_ff @(posedge clk) begin
    d1_a      <= rf_a;
    d1_b      <= rf_b;
    d2_a      <= d1_a;
    d2_b      <= d1_b;
    tw_re_d1  <= tw_re;
    tw_im_d1  <= tw_im;
    tw_re_d2  <= tw_re_d1;
    tw_im_d2  <= tw_im_d1;
    mem_addr  <= addr_calc;
    mem_wdata <= rf_b;
  end

  always_comb begin
    case (st[4].op)
      OP_FADD:     fu_mode = FU_ADD;
      OP_FSUB:     fu_mode = FU_SUB;
      OP_MUL_REAL: fu_mode = FU_MUL_REAL;
      OP_MUL_IMAG: fu_mode = FU_MUL_IMAG;
      default:     fu_mode = FU_MUL;
    endcase
    case (st[4].op)
      OP_ISUB: int_op = INT_SUB;
      OP_IAND: int_op = INT_AND;
      OP_IOR:  int_op = INT_OR;
      OP_IXOR: int_op = INT_XOR;
      OP_ISHL: int_op = INT_SHL;
      OP_ISHR: int_op = INT_SHR;
      OP_IMUL: int_op = INT_MUL;
      default: int_op = INT_ADD;
    endcase
  end

  complex_fu u_fu (
    .clk    (clk),
    .mode   (fu_mode),
    .ra     (d2_a),
    .rb     (d2_b),
    .tw_re  (tw_re_d2),
    .tw_im  (tw_im_d2),
    .result (fu_result)
  );

  int_alu u_alu (
    .op (int_op),
    .a  (d2_a),
    .b  (d2_b),
    .y  (int_y)
  );

  // Integer, immediate and thread-number results, then the load data.
  always_ff @(posedge clk) begin
    case (st[4].op)
      OP_MOVI:  misc_q <= {{16{st[4].imm[15]}}, st[4].imm};
      OP_MOVHI: misc_q <= {st[4].imm, 16'd0};
      OP_TID:   misc_q <= 32'(st[4].row) * 32'(NUM_SP) + 32'(SP_ID);
      default:  misc_q <= int_y;
    endcase
    misc_q2 <= misc_q;
    ld_q    <= ld_data;
    alt_q   <= (st[6].op == OP_LOD) ? ld_q : misc_q2;
  end

  // Write-back.
  always_comb begin
    rf_we    = st[7].active && writes_rd(st[7].op);
    rf_waddr = rf_addr(st[7].row, st[7].rd, regs_log2);
    rf_wdata = is_fu_op(st[7].op) ? fu_result : alt_q;
  end

endmodule
