// egpu_pkg: shared sizes, instruction format and pipeline types of the
// soft GPGPU streaming multiprocessor (SM).
//
// One SM has 16 scalar processors (SPs) that execute the same instruction
// for 16 threads at a time.  A "row" is one group of 16 threads (thread
// t = row*16 + SP index); the wavefront is the number of rows that every
// instruction is run for.  The sizes below follow the configuration used
// of the paper: 32K registers in total (2048 per SP) shared by the threads
// of a run, 2^regs_log2 registers per thread (8 to 64, chosen at start), so
// 2048 >> regs_log2 rows at most (512 threads with 64 registers, 1024 with
// 32, up to 4096 threads with 8), and a 64 KB shared memory (16384 words).  The instruction encoding is this design's
// own; only the instruction names lod_coeff, mul_real, mul_imag, coeff_en,
// coeff_dis, save and save_bank come from the architecture description.
package egpu_pkg;

  localparam int NUM_SP      = 16;
  localparam int NUM_BANKS   = 4;
  localparam int DATA_W      = 32;
  localparam int SHMEM_DEPTH = 16384;              // words per bank (64 KB)
  localparam int SHMEM_AW    = $clog2(SHMEM_DEPTH);
  localparam int RF_DEPTH    = 2048;               // registers per SP
  localparam int RF_AW       = $clog2(RF_DEPTH);
  localparam int REG_BITS    = 6;                  // up to 64 registers per thread
  localparam int MAX_THREADS = 4096;
  localparam int ROWS        = MAX_THREADS / NUM_SP;  // 256 rows of 16 threads
  localparam int ROW_BITS    = $clog2(ROWS);
  localparam int IMEM_DEPTH  = 1024;
  localparam int PC_BITS     = $clog2(IMEM_DEPTH);
  localparam int PIPE_DEPTH  = 8;                  // issue to register write

  typedef enum logic [4:0] {
    OP_NOP       = 5'd0,
    OP_FADD      = 5'd1,   // rd = ra + rb
    OP_FSUB      = 5'd2,   // rd = ra - rb
    OP_FMUL      = 5'd3,   // rd = ra * rb
    OP_MUL_REAL  = 5'd4,   // rd = ra*tw_re - rb*tw_im
    OP_MUL_IMAG  = 5'd5,   // rd = ra*tw_im + rb*tw_re
    OP_LOD_COEFF = 5'd6,   // cache[thread] = (ra, rb)
    OP_COEFF_EN  = 5'd7,   // enable coefficient cache clock
    OP_COEFF_DIS = 5'd8,   // disable coefficient cache clock
    OP_IADD      = 5'd9,
    OP_ISUB      = 5'd10,
    OP_IAND      = 5'd11,
    OP_IOR       = 5'd12,
    OP_IXOR      = 5'd13,
    OP_ISHL      = 5'd14,
    OP_ISHR      = 5'd15,
    OP_IMUL      = 5'd16,
    OP_MOVI      = 5'd17,  // rd = sign-extended imm
    OP_MOVHI     = 5'd18,  // rd = imm << 16
    OP_TID       = 5'd19,  // rd = thread number
    OP_LOD       = 5'd20,  // rd = shmem[ra + imm]
    OP_SAVE      = 5'd21,  // shmem[ra + imm] = rb, all four banks
    OP_SAVE_BANK = 5'd22,  // shmem[ra + imm] = rb, bank SP%4 only
    OP_STOP      = 5'd31
  } opcode_e;

  typedef struct packed {
    opcode_e             op;
    logic [REG_BITS-1:0] rd;
    logic [REG_BITS-1:0] ra;
    logic [REG_BITS-1:0] rb;
    logic [15:0]         imm;
  } instr_t;

  // What the sequencer hands to every SP each cycle.  sub is the SP group
  // (loads, save_bank: 0..3) or the SP index (save: 0..15) served this cycle.
  typedef struct packed {
    logic                valid;
    instr_t              ins;
    logic [ROW_BITS-1:0] row;
    logic [3:0]          sub;
  } issue_t;

  typedef enum logic [2:0] {
    FU_MUL, FU_ADD, FU_SUB, FU_MUL_REAL, FU_MUL_IMAG
  } fu_mode_e;

  typedef enum logic [3:0] {
    INT_ADD, INT_SUB, INT_AND, INT_OR, INT_XOR, INT_SHL, INT_SHR, INT_MUL
  } int_op_e;

  // Register-file address of register r of the thread in row "row" when each
  // thread owns 2^regs_log2 registers.
  function automatic logic [RF_AW-1:0] rf_addr(input logic [ROW_BITS-1:0] row,
                                               input logic [REG_BITS-1:0] r,
                                               input logic [2:0]          regs_log2);
    logic [REG_BITS-1:0] mask;
    mask = REG_BITS'((32'd1 << regs_log2) - 1);
    return RF_AW'((32'(row) << regs_log2) | 32'(r & mask));
  endfunction

  // Number of cycles one row of an instruction occupies the issue slot.
  function automatic int unsigned subs_per_row(opcode_e op);
    case (op)
      OP_LOD, OP_SAVE_BANK: return 4;
      OP_SAVE:              return 16;
      default:              return 1;
    endcase
  endfunction

  function automatic logic is_fu_op(opcode_e op);
    return op inside {OP_FADD, OP_FSUB, OP_FMUL, OP_MUL_REAL, OP_MUL_IMAG};
  endfunction

  function automatic logic is_int_op(opcode_e op);
    return op inside {OP_IADD, OP_ISUB, OP_IAND, OP_IOR, OP_IXOR, OP_ISHL, OP_ISHR, OP_IMUL};
  endfunction

  // Instructions that write rd.
  function automatic logic writes_rd(opcode_e op);
    return is_fu_op(op) || is_int_op(op) ||
           op inside {OP_MOVI, OP_MOVHI, OP_TID, OP_LOD};
  endfunction

endpackage
