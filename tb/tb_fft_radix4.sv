// tb_fft_radix4: runs radix-4 FFTs of 256, 1024 and 4096 points on the SM
// at its default sizes and checks the spectra and the memory cycle counts.
//
// The program is generated here.  One thread computes one radix-4
// decimation-in-frequency butterfly per pass (N/4 threads; 64 registers
// per thread for 256 and 1024 points, 32 for 4096).  In pass p with
// stride s = N/4^(p+1), thread t works on the four points
// base + m*s, base = (t/s)*4s + t%s, m = 0..3, in place:
//   addresses   integer shift/and/add from the thread number
//   butterfly   fadd/fsub; the -j rotation is a register move plus an
//               integer XOR of the sign bit
//   twiddles    W_N^(m*k*N/4s), k = t%s, loaded from a table in shared
//               memory and applied with lod_coeff, mul_real, mul_imag
//               (skipped in the last pass, where they are all 1)
//   write back  save_bank while the stride is 16 or more, because then the
//               next pass reads each point on an SP with the same index
//               mod 4; save (all four banks) in the last two passes.
// The result is in base-4 digit-reversed order; it is read through the
// global port and compared with a DFT computed in double precision.
// NOPs are inserted where a result would be read before it is written
// (short wavefronts only).
// The cycles spent on loads, saves and save_banks are compared with the
// figures printed for the virtually banked variant in the paper's radix-4
// profiling table (256: 800/1024/256, 1024: 4096/4096/1536,
// 4096: 19968/16384/8192).
module tb_fft_radix4;
  import egpu_pkg::*;
  import fp_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  logic [ROW_BITS:0] wave_rows;
  logic [2:0] regs_log2;
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
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- program
  instr_t prog [$];
  longint wr_time [64];   // cycle after which each register's last write is visible
  longint t_now;          // issue cycle of the next instruction
  int     W;              // rows

  function automatic instr_t mk(opcode_e op, int rd, int ra, int rb, int imm);
    return '{op: op, rd: REG_BITS'(rd), ra: REG_BITS'(ra), rb: REG_BITS'(rb), imm: 16'(imm)};
  endfunction

  function automatic int nsub(opcode_e op);
    return int'(subs_per_row(op));
  endfunction

  // Append an instruction, preceded by NOPs if row r would read ra/rb
  // before the producer's row r has been written.
  task automatic emit(opcode_e op, int rd, int ra, int rb, int imm);
    bit reads_a, reads_b;
    reads_a = !(op inside {OP_NOP, OP_MOVI, OP_MOVHI, OP_TID, OP_COEFF_EN, OP_COEFF_DIS});
    reads_b = op inside {OP_FADD, OP_FSUB, OP_FMUL, OP_MUL_REAL, OP_MUL_IMAG, OP_LOD_COEFF,
                         OP_IADD, OP_ISUB, OP_IAND, OP_IOR, OP_IXOR, OP_ISHL, OP_ISHR, OP_IMUL,
                         OP_SAVE, OP_SAVE_BANK};
    // Row r reads at t_now + r*nsub; producer row r wrote at wr_time + r*its nsub,
    // so compare at row 0 with the producer's offsets stored per register.
    forever begin
      bit ok = 1;
      if (reads_a && t_now < wr_time[ra]) ok = 0;
      if (reads_b && t_now < wr_time[rb]) ok = 0;
      if (ok) break;
      prog.push_back(mk(OP_NOP, 0, 0, 0, 0));
      t_now += W;
      n_nops++;
    end
    prog.push_back(mk(op, rd, ra, rb, imm));
    if (writes_rd(op)) begin
      // Last sub-cycle of row 0 plus the pipeline; rows keep their spacing,
      // and a reader never issues its rows faster than one per cycle, so
      // the row-0 check is the binding one when the producer issues one row
      // per cycle.  For loads (4 cycles per row) use the last row instead.
      if (nsub(op) == 1) wr_time[rd] = t_now + PIPE_DEPTH - 1;
      else               wr_time[rd] = t_now + longint'(W) * nsub(op) + PIPE_DEPTH - W;
    end
    t_now += (op inside {OP_COEFF_EN, OP_COEFF_DIS}) ? 1 : longint'(W) * nsub(op);
  endtask

  int n_nops;

  // Register map.
  localparam int RT = 0, RTMP = 1, RBASE = 2, RK = 20, RE1 = 21, RE2 = 22, RE3 = 23, RSGN = 30;
  function automatic int XR(int m); return 4 + m; endfunction
  function automatic int XI(int m); return 8 + m; endfunction

  task automatic build_program(int n);
    int passes, s, ls, ln;
    prog.delete();
    n_nops = 0;
    t_now = 0;
    foreach (wr_time[i]) wr_time[i] = 0;
    ln = $clog2(n);
    passes = ln / 2;
    emit(OP_TID, RT, 0, 0, 0);
    emit(OP_MOVHI, RSGN, 0, 0, 16'h8000);
    emit(OP_COEFF_EN, 0, 0, 0, 0);
    for (int p = 0; p < passes; p++) begin
      bit last, vm;
      s  = n >> (2 * (p + 1));
      ls = $clog2(s);
      last = (p == passes - 1);
      vm   = (s >= 16);
      // base = ((t >> ls) << (ls + 2)) + (t & (s - 1))
      emit(OP_MOVI, RTMP, 0, 0, ls);
      emit(OP_ISHR, RBASE, RT, RTMP, 0);
      emit(OP_MOVI, RTMP, 0, 0, ls + 2);
      emit(OP_ISHL, RBASE, RBASE, RTMP, 0);
      emit(OP_MOVI, RTMP, 0, 0, s - 1);
      emit(OP_IAND, RK, RT, RTMP, 0);
      emit(OP_IADD, RBASE, RBASE, RK, 0);
      for (int m = 0; m < 4; m++) emit(OP_LOD, XR(m), RBASE, 0, m * s);
      for (int m = 0; m < 4; m++) emit(OP_LOD, XI(m), RBASE, 0, n + m * s);
      if (!last) begin
        emit(OP_MOVI, RTMP, 0, 0, 2 * p);              // log2(N / 4s)
        emit(OP_ISHL, RE1, RK, RTMP, 0);
        emit(OP_IADD, RE2, RE1, RE1, 0);
        emit(OP_IADD, RE3, RE2, RE1, 0);
        emit(OP_LOD, 24, RE1, 0, 2 * n);
        emit(OP_LOD, 25, RE1, 0, 3 * n);
        emit(OP_LOD, 26, RE2, 0, 2 * n);
        emit(OP_LOD, 27, RE2, 0, 3 * n);
        emit(OP_LOD, 28, RE3, 0, 2 * n);
        emit(OP_LOD, 29, RE3, 0, 3 * n);
      end
      // Butterfly.
      emit(OP_FADD, 12, XR(0), XR(2), 0);   // a0
      emit(OP_FADD, 13, XI(0), XI(2), 0);
      emit(OP_FSUB, 14, XR(0), XR(2), 0);   // a1
      emit(OP_FSUB, 15, XI(0), XI(2), 0);
      emit(OP_FADD, 16, XR(1), XR(3), 0);   // a2
      emit(OP_FADD, 17, XI(1), XI(3), 0);
      emit(OP_FSUB, 18, XR(1), XR(3), 0);   // d = x1 - x3
      emit(OP_FSUB, 19, XI(1), XI(3), 0);
      emit(OP_IXOR, 18, 18, RSGN, 0);       // -j*d = (d_im, -d_re): negate d_re
      emit(OP_FADD, XR(0), 12, 16, 0);      // y0 = a0 + a2
      emit(OP_FADD, XI(0), 13, 17, 0);
      emit(OP_FSUB, XR(2), 12, 16, 0);      // y2 = a0 - a2
      emit(OP_FSUB, XI(2), 13, 17, 0);
      emit(OP_FADD, XR(1), 14, 19, 0);      // y1 = a1 + (-j d)
      emit(OP_FADD, XI(1), 15, 18, 0);
      emit(OP_FSUB, XR(3), 14, 19, 0);      // y3 = a1 - (-j d)
      emit(OP_FSUB, XI(3), 15, 18, 0);
      if (!last) begin
        for (int m = 1; m < 4; m++) begin
          emit(OP_LOD_COEFF, 0, 24 + 2 * (m - 1), 25 + 2 * (m - 1), 0);
          emit(OP_MUL_REAL, 10 + 2 * m, XR(m), XI(m), 0);
          emit(OP_MUL_IMAG, 11 + 2 * m, XR(m), XI(m), 0);
        end
      end
      for (int m = 0; m < 4; m++) begin
        int rre, rim;
        rre = (last || m == 0) ? XR(m) : 10 + 2 * m;
        rim = (last || m == 0) ? XI(m) : 11 + 2 * m;
        emit(vm ? OP_SAVE_BANK : OP_SAVE, 0, RBASE, rre, m * s);
        emit(vm ? OP_SAVE_BANK : OP_SAVE, 0, RBASE, rim, n + m * s);
      end
    end
    emit(OP_COEFF_DIS, 0, 0, 0, 0);
    prog.push_back(mk(OP_STOP, 0, 0, 0, 0));
  endtask

  // ---------------------------------------------------------------- host side
  task automatic gwrite(int a, logic [31:0] d);
    global_wr_en = 1; global_wr_addr = SHMEM_AW'(a); global_data_in = d;
    @(posedge clk); #1;
    global_wr_en = 0;
  endtask

  task automatic gread(int a, output logic [31:0] q);
    global_rd_addr = SHMEM_AW'(a);
    @(posedge clk); #1; @(posedge clk); #1;
    q = data_out[0];
  endtask

  int c_lod, c_save, c_save_bank;
  always @(posedge clk) if (rst_n && dut.issue.valid) begin
    case (dut.issue.ins.op)
      OP_LOD:       c_lod++;
      OP_SAVE:      c_save++;
      OP_SAVE_BANK: c_save_bank++;
      default: ;
    endcase
  end

  function automatic int digit_rev4(int k, int digits);
    int r = 0;
    for (int i = 0; i < digits; i++) begin
      r = (r << 2) | (k & 3);
      k = k >> 2;
    end
    return r;
  endfunction

  task automatic run_fft(int n, int rl, int exp_lod, int exp_save, int exp_vm);
    real xr [], xi [], cs [], sn [];
    real err_max, rms;
    int  cycles;
    logic [31:0] fr, fi;
    xr = new[n]; xi = new[n]; cs = new[n]; sn = new[n];
    W = n / 4 / NUM_SP;
    build_program(n);
    // Data and twiddle table W_N^e = cos(2 pi e/N) - j sin(2 pi e/N).
    for (int e = 0; e < n; e++) begin
      cs[e] = $cos(2.0 * 3.141592653589793 * e / n);
      sn[e] = $sin(2.0 * 3.141592653589793 * e / n);
      gwrite(2 * n + e, r2f(cs[e]));
      gwrite(3 * n + e, r2f(-sn[e]));
    end
    for (int i = 0; i < n; i++) begin
      fr = rand_f32(2);
      fi = rand_f32(2);
      xr[i] = f2r(fr);
      xi[i] = f2r(fi);
      gwrite(i, fr);
      gwrite(n + i, fi);
    end
    for (int i = 0; i < prog.size(); i++) begin
      imem_we = 1; imem_addr = PC_BITS'(i); imem_wdata = prog[i];
      @(posedge clk); #1;
    end
    imem_we = 0;
    c_lod = 0; c_save = 0; c_save_bank = 0;
    wave_rows = (ROW_BITS + 1)'(W);
    regs_log2 = 3'(rl);
    start = 1;
    @(posedge clk); #1;
    start = 0;
    cycles = 1;
    while (!done) begin
      @(posedge clk); #1;
      cycles++;
    end
    $display("%0d-point radix-4: %0d instructions (%0d NOPs), %0d cycles; load %0d, save %0d, save_bank %0d cycles",
             n, prog.size(), n_nops, cycles, c_lod, c_save, c_save_bank);
    checks += 3;
    if (c_lod != exp_lod)       begin failures++; $display("FAIL load cycles %0d, expected %0d", c_lod, exp_lod); end
    if (c_save != exp_save)     begin failures++; $display("FAIL save cycles %0d, expected %0d", c_save, exp_save); end
    if (c_save_bank != exp_vm)  begin failures++; $display("FAIL save_bank cycles %0d, expected %0d", c_save_bank, exp_vm); end
    // Reference DFT and comparison.
    rms = 0.0;
    err_max = 0.0;
    begin
      real yr [], yi [];
      yr = new[n]; yi = new[n];
      for (int k = 0; k < n; k++) begin
        real ar = 0.0, ai = 0.0;
        for (int i = 0; i < n; i++) begin
          int e;
          e = (i * k) % n;
          ar += xr[i] * cs[e] + xi[i] * sn[e];
          ai += xi[i] * cs[e] - xr[i] * sn[e];
        end
        yr[k] = ar; yi[k] = ai;
        rms += ar * ar + ai * ai;
      end
      rms = $sqrt(rms / n);
      for (int k = 0; k < n; k++) begin
        real dr, di;
        int pos;
        pos = digit_rev4(k, $clog2(n) / 2);
        gread(pos, fr);
        gread(n + pos, fi);
        dr = f2r(fr) - yr[k];
        di = f2r(fi) - yi[k];
        if (dr < 0) dr = -dr;
        if (di < 0) di = -di;
        if (dr > err_max) err_max = dr;
        if (di > err_max) err_max = di;
        checks++;
        if (dr > 1e-5 * rms || di > 1e-5 * rms) begin
          failures++;
          if (failures < 10) $display("FAIL X[%0d]: (%f, %f), expected (%f, %f)", k, f2r(fr), f2r(fi), yr[k], yi[k]);
        end
      end
    end
    $display("  largest error %g of rms %g", err_max, rms);
  endtask

  initial begin
    start = 0; imem_we = 0; imem_addr = 0; imem_wdata = '0; wave_rows = 0; regs_log2 = 6;
    global_wr_en = 0; global_wr_addr = 0; global_rd_addr = 0; global_data_in = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run_fft(256,  6, 800,   1024,  256);
    run_fft(1024, 6, 4096,  4096,  1536);
    run_fft(4096, 5, 19968, 16384, 8192);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
