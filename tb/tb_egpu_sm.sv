// tb_egpu_sm: end-to-end test of the SM at its default sizes, with the
// thread configuration of the radix-8/16 FFTs: 32 rows = 512 threads, 64
// registers per thread.
//
// The host loads 2T complex points (T = 512 threads) and T twiddle factors
// through the global port, writes a program into the instruction memory
// and starts the SM.  Every thread t computes one radix-2 decimation-in-
// time butterfly with a complex twiddle:
//     b' = x[t+T] * w[t]   (lod_coeff, mul_real, mul_imag)
//     x[t]   <- x[t] + b'  (fadd)      x[t+T] <- x[t] - b'  (fsub)
// Real parts go back with save (all four banks).  Imaginary parts go back
// with save_bank, so each is valid only in bank (SP index mod 4); a second
// phase loads them again on the same threads (same SPs, same banks), adds
// the two and saves the sum with save.  The host then reads every result
// through the global port; for save_bank addresses it reads the owning
// bank and also checks that the other three banks still hold the old value.
// Expected values are computed with real arithmetic (fp_ref_pkg).
// The run time is checked against the issue rates of the design: a load and
// a save_bank take 4 cycles per 16 threads, a save 16, other instructions 1.
// Each mechanism (load, save, save_bank, lod_coeff, mul_real, mul_imag,
// fadd, fsub, coeff_en, coeff_dis, integer op, thread id) is counted in the
// issue stream and must occur.
module tb_egpu_sm;
  import egpu_pkg::*;
  import fp_ref_pkg::*;

  localparam int W  = 32;             // wavefront depth: 512 threads x 64 registers
  localparam int T  = W * NUM_SP;     // threads
  localparam int IM = 1024;           // imaginary parts base
  localparam int TWR = 2048, TWI = 3072, OUT2 = 5120;

  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  logic [ROW_BITS:0] wave_rows;
  logic [2:0] regs_log2 = 3'd6;
  logic imem_we;
  logic [PC_BITS-1:0] imem_addr;
  instr_t imem_wdata;
  logic [DATA_W-1:0] global_data_in;
  logic [SHMEM_AW-1:0] global_wr_addr, global_rd_addr;
  logic global_wr_en;
  logic [DATA_W-1:0] data_out [NUM_BANKS];

  egpu_sm dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic instr_t mk(opcode_e op, int rd, int ra, int rb, int imm);
    return '{op: op, rd: REG_BITS'(rd), ra: REG_BITS'(ra), rb: REG_BITS'(rb), imm: 16'(imm)};
  endfunction

  instr_t prog [$];
  logic [31:0] xr [2*T], xi [2*T], wr [T], wi [T];

  task automatic gwrite(int a, logic [31:0] d);
    global_wr_en = 1; global_wr_addr = SHMEM_AW'(a); global_data_in = d;
    @(posedge clk); #1;
    global_wr_en = 0;
  endtask

  task automatic gread(int a, output logic [31:0] q [NUM_BANKS]);
    global_rd_addr = SHMEM_AW'(a);
    @(posedge clk); #1; @(posedge clk); #1;
    q = data_out;
  endtask

  // Mechanism counters, taken from the issue stream and the memory control.
  int n_lod, n_save, n_save_bank, n_lod_coeff, n_mul_real, n_mul_imag, n_fadd, n_fsub;
  int n_coeff_en, n_coeff_dis, n_int, n_tid, n_bank_write_cycles, n_std_write_cycles;
  always @(posedge clk) if (rst_n) begin
    if (dut.issue.valid) begin
      case (dut.issue.ins.op)
        OP_LOD:       n_lod++;
        OP_SAVE:      n_save++;
        OP_SAVE_BANK: n_save_bank++;
        OP_LOD_COEFF: n_lod_coeff++;
        OP_MUL_REAL:  n_mul_real++;
        OP_MUL_IMAG:  n_mul_imag++;
        OP_FADD:      n_fadd++;
        OP_FSUB:      n_fsub++;
        OP_COEFF_EN:  n_coeff_en++;
        OP_COEFF_DIS: n_coeff_dis++;
        OP_IADD:      n_int++;
        OP_TID:       n_tid++;
        default: ;
      endcase
    end
    if (dut.we_to_shr && dut.bank_mode)  n_bank_write_cycles++;
    if (dut.we_to_shr && !dut.bank_mode) n_std_write_cycles++;
  end

  task automatic count_check(string name, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s happened %0d times, expected %0d", name, got, exp);
    end else $display("  %-12s %0d", name, got);
  endtask

  initial begin
    int cycles, exp_cycles;
    logic [31:0] q [NUM_BANKS];
    start = 0; imem_we = 0; imem_addr = 0; imem_wdata = '0; wave_rows = 0;
    global_wr_en = 0; global_wr_addr = 0; global_rd_addr = 0; global_data_in = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // Data: random x, twiddles w[t] = exp(-2 pi j t / 2T).
    for (int i = 0; i < 2 * T; i++) begin
      xr[i] = rand_f32(4);
      xi[i] = rand_f32(4);
      gwrite(i, xr[i]);
      gwrite(IM + i, xi[i]);
    end
    for (int t = 0; t < T; t++) begin
      wr[t] = r2f($cos(2.0 * 3.14159265358979 * t / (2 * T)));
      wi[t] = r2f(-$sin(2.0 * 3.14159265358979 * t / (2 * T)));
      gwrite(TWR + t, wr[t]);
      gwrite(TWI + t, wi[t]);
    end

    // Program.
    prog.push_back(mk(OP_TID,  0, 0, 0, 0));
    prog.push_back(mk(OP_MOVI, 1, 0, 0, T));
    prog.push_back(mk(OP_IADD, 2, 0, 1, 0));         // r2 = t + T
    prog.push_back(mk(OP_LOD,  3, 0, 0, 0));         // a_re
    prog.push_back(mk(OP_LOD,  4, 0, 0, IM));        // a_im
    prog.push_back(mk(OP_LOD,  5, 2, 0, 0));         // b_re
    prog.push_back(mk(OP_LOD,  6, 2, 0, IM));        // b_im
    prog.push_back(mk(OP_LOD,  7, 0, 0, TWR));       // w_re
    prog.push_back(mk(OP_LOD,  8, 0, 0, TWI));       // w_im
    prog.push_back(mk(OP_COEFF_EN, 0, 0, 0, 0));
    prog.push_back(mk(OP_LOD_COEFF, 0, 7, 8, 0));
    prog.push_back(mk(OP_MUL_REAL, 9, 5, 6, 0));
    prog.push_back(mk(OP_MUL_IMAG, 10, 5, 6, 0));
    prog.push_back(mk(OP_COEFF_DIS, 0, 0, 0, 0));
    prog.push_back(mk(OP_FADD, 11, 3, 9, 0));
    prog.push_back(mk(OP_FADD, 12, 4, 10, 0));
    prog.push_back(mk(OP_FSUB, 13, 3, 9, 0));
    prog.push_back(mk(OP_FSUB, 14, 4, 10, 0));
    prog.push_back(mk(OP_SAVE, 0, 0, 11, 0));
    prog.push_back(mk(OP_SAVE, 0, 2, 13, 0));
    prog.push_back(mk(OP_SAVE_BANK, 0, 0, 12, IM));
    prog.push_back(mk(OP_SAVE_BANK, 0, 2, 14, IM));
    prog.push_back(mk(OP_LOD, 15, 0, 0, IM));
    prog.push_back(mk(OP_LOD, 16, 2, 0, IM));
    prog.push_back(mk(OP_NOP, 0, 0, 0, 0));
    prog.push_back(mk(OP_FADD, 17, 15, 16, 0));
    prog.push_back(mk(OP_SAVE, 0, 0, 17, OUT2));
    prog.push_back(mk(OP_STOP, 0, 0, 0, 0));
    for (int i = 0; i < prog.size(); i++) begin
      imem_we = 1; imem_addr = PC_BITS'(i); imem_wdata = prog[i];
      @(posedge clk); #1;
    end
    imem_we = 0;

    // Expected run time from the per-row issue rates.
    exp_cycles = 0;
    foreach (prog[i]) begin
      if (prog[i].op inside {OP_COEFF_EN, OP_COEFF_DIS}) exp_cycles += 1;
      else if (prog[i].op != OP_STOP) exp_cycles += W * int'(subs_per_row(prog[i].op));
    end
    exp_cycles += 1 + 1 + PIPE_DEPTH;   // start, STOP fetch, drain

    wave_rows = (ROW_BITS + 1)'(W);
    start = 1;
    @(posedge clk); #1;
    start = 0;
    cycles = 1;
    while (!done) begin
      @(posedge clk); #1;
      cycles++;
    end
    checks++;
    if (cycles != exp_cycles) begin
      failures++;
      $display("FAIL run took %0d cycles, expected %0d", cycles, exp_cycles);
    end else $display("  run time %0d cycles", cycles);

    // Results.
    for (int t = 0; t < T; t++) begin
      logic [31:0] br, bi, o0r, o0i, o1r, o1i, s;
      int sp;
      sp = t % NUM_SP;
      br  = ref_dot2(xr[t + T], wr[t], wi[t], {~xi[t + T][31], xi[t + T][30:0]});
      bi  = ref_dot2(xr[t + T], wi[t], wr[t], xi[t + T]);
      o0r = ref_dot2(xr[t], FP_ONE_TB, FP_ONE_TB, br);
      o0i = ref_dot2(xi[t], FP_ONE_TB, FP_ONE_TB, bi);
      o1r = ref_dot2(xr[t], FP_ONE_TB, FP_ONE_TB, {~br[31], br[30:0]});
      o1i = ref_dot2(xi[t], FP_ONE_TB, FP_ONE_TB, {~bi[31], bi[30:0]});
      s   = ref_dot2(o0i, FP_ONE_TB, FP_ONE_TB, o1i);
      // save: all four banks hold the real parts.
      gread(t, q);
      for (int b = 0; b < NUM_BANKS; b++) begin
        checks++;
        if (q[b] !== o0r) begin failures++; if (failures < 10) $display("FAIL re[%0d] bank %0d: %h exp %h", t, b, q[b], o0r); end
      end
      gread(t + T, q);
      checks++;
      if (q[t % 4] !== o1r || q[(t + 1) % 4] !== o1r) begin failures++; if (failures < 10) $display("FAIL re[%0d+T]", t); end
      // save_bank: only bank sp%4 holds the new value.
      gread(IM + t, q);
      for (int b = 0; b < NUM_BANKS; b++) begin
        checks++;
        if (q[b] !== ((b == sp % 4) ? o0i : xi[t])) begin
          failures++;
          if (failures < 10) $display("FAIL im[%0d] bank %0d: %h exp %h", t, b, q[b], (b == sp % 4) ? o0i : xi[t]);
        end
      end
      gread(IM + t + T, q);
      checks++;
      if (q[sp % 4] !== o1i) begin failures++; if (failures < 10) $display("FAIL im[%0d+T]", t); end
      // Phase 2: values read back through the bank of their SP.
      gread(OUT2 + t, q);
      checks++;
      if (q[0] !== s || q[3] !== s) begin failures++; if (failures < 10) $display("FAIL phase2[%0d]: %h exp %h", t, q[0], s); end
    end

    // Every mechanism happened, at the expected rate.
    count_check("lod slots",       n_lod,       8 * W * 4);
    count_check("save slots",      n_save,      3 * W * 16);
    count_check("save_bank slots", n_save_bank, 2 * W * 4);
    count_check("std writes",      n_std_write_cycles,  3 * W * 16);
    count_check("bank writes",     n_bank_write_cycles, 2 * W * 4);
    count_check("lod_coeff",       n_lod_coeff, W);
    count_check("mul_real",        n_mul_real,  W);
    count_check("mul_imag",        n_mul_imag,  W);
    count_check("fadd",            n_fadd,      3 * W);
    count_check("fsub",            n_fsub,      2 * W);
    count_check("coeff_en",        n_coeff_en,  1);
    count_check("coeff_dis",       n_coeff_dis, 1);
    count_check("int op",          n_int,       W);
    count_check("thread id",       n_tid,       W);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam logic [31:0] FP_ONE_TB = 32'h3F80_0000;
endmodule
