// tb_sp_core: drives one SP (SP_ID 5) with hand-made issue slots, all on
// thread row 2, spaced 8 cycles apart (the pipeline depth).  Results are
// observed through save: mem_addr / mem_wdata three cycles after the save
// issues.  Covers immediates, the thread number, integer add and xor, FP
// multiply/add/subtract, a load (data supplied on ld_data five cycles after
// issue), lod_coeff + mul_real + mul_imag, and coeff_dis freezing the cache.
module tb_sp_core;
  import egpu_pkg::*;
  localparam int ID  = 5;
  localparam int ROW = 2;
  logic clk = 0, rst_n = 0;
  issue_t issue;
  logic [2:0] regs_log2 = 3'd6;
  logic [SHMEM_AW-1:0] mem_addr;
  logic [31:0] mem_wdata, ld_data;
  int checks = 0, failures = 0;

  sp_core #(.SP_ID(ID)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic instr_t mk(opcode_e op, int rd, int ra, int rb, int imm);
    return '{op: op, rd: REG_BITS'(rd), ra: REG_BITS'(ra), rb: REG_BITS'(rb), imm: 16'(imm)};
  endfunction

  // Issue one instruction for one cycle, then 7 empty cycles.
  task automatic run(instr_t ins, int sub = 0);
    issue = '{valid: 1'b1, ins: ins, row: ROW_BITS'(ROW), sub: 4'(sub)};
    @(posedge clk); #1;
    issue.valid = 1'b0;
    repeat (7) @(posedge clk);
    #1;
  endtask

  // Save rb at [ra + imm] and check address and data at issue + 3.
  task automatic save_check(int ra, int rb, int imm, logic [SHMEM_AW-1:0] eaddr,
                            logic [31:0] edata, string what);
    issue = '{valid: 1'b1, ins: mk(OP_SAVE, 0, ra, rb, imm), row: ROW_BITS'(ROW), sub: 4'(ID)};
    @(posedge clk); #1;
    issue.valid = 1'b0;
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (mem_addr !== eaddr || mem_wdata !== edata) begin
      failures++;
      $display("FAIL %s: addr %0d data %h, expected %0d %h", what, mem_addr, mem_wdata, eaddr, edata);
    end
    repeat (5) @(posedge clk);
    #1;
  endtask

  initial begin
    issue = '0; ld_data = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    run(mk(OP_MOVI, 1, 0, 0, 100));
    run(mk(OP_MOVI, 2, 0, 0, -23));
    run(mk(OP_IADD, 3, 1, 2, 0));
    run(mk(OP_TID, 4, 0, 0, 0));
    save_check(4, 3, 10, SHMEM_AW'(ROW * 16 + ID + 10), 32'd77, "iadd/tid");
    // Load: address r4+0, data returned on ld_data at issue + 5.
    issue = '{valid: 1'b1, ins: mk(OP_LOD, 5, 4, 0, 0), row: ROW_BITS'(ROW), sub: 4'(ID / 4)};
    @(posedge clk); #1;
    issue.valid = 1'b0;
    repeat (2) @(posedge clk); #1;
    checks++;
    if (mem_addr !== SHMEM_AW'(ROW * 16 + ID)) begin failures++; $display("FAIL load address %0d", mem_addr); end
    repeat (2) @(posedge clk); #1;
    ld_data = 32'hA5A5_1234;
    @(posedge clk); #1;
    ld_data = 32'h0;
    repeat (3) @(posedge clk); #1;
    save_check(4, 5, 0, SHMEM_AW'(ROW * 16 + ID), 32'hA5A5_1234, "load");
    // A load issued for another group must not write the register.
    issue = '{valid: 1'b1, ins: mk(OP_LOD, 5, 4, 0, 0), row: ROW_BITS'(ROW), sub: 4'(0)};
    @(posedge clk); #1;
    issue.valid = 1'b0;
    repeat (4) @(posedge clk); #1;
    ld_data = 32'hFFFF_FFFF;
    @(posedge clk); #1;
    ld_data = 0;
    repeat (3) @(posedge clk); #1;
    save_check(4, 5, 0, SHMEM_AW'(ROW * 16 + ID), 32'hA5A5_1234, "inactive load");
    // FP arithmetic.
    run(mk(OP_MOVHI, 6, 0, 0, 16'h3FC0));   // 1.5
    run(mk(OP_MOVHI, 7, 0, 0, 16'h4000));   // 2.0
    run(mk(OP_FMUL, 8, 6, 7, 0));
    save_check(4, 8, 0, SHMEM_AW'(ROW * 16 + ID), 32'h4040_0000, "fmul");
    run(mk(OP_FADD, 8, 6, 7, 0));
    save_check(4, 8, 0, SHMEM_AW'(ROW * 16 + ID), 32'h4060_0000, "fadd");
    run(mk(OP_FSUB, 8, 6, 7, 0));
    save_check(4, 8, 0, SHMEM_AW'(ROW * 16 + ID), 32'hBF00_0000, "fsub");
    run(mk(OP_MOVHI, 9, 0, 0, 16'h8000));
    run(mk(OP_IXOR, 8, 6, 9, 0));
    save_check(4, 8, 0, SHMEM_AW'(ROW * 16 + ID), 32'hBFC0_0000, "xor negate");
    // Complex multiply (1 + 3j) * (1.5 + 2j) = -4.5 + 6.5j.
    run(mk(OP_COEFF_EN, 0, 0, 0, 0));
    run(mk(OP_LOD_COEFF, 0, 6, 7, 0));
    run(mk(OP_MOVHI, 10, 0, 0, 16'h3F80));  // 1.0
    run(mk(OP_MOVHI, 11, 0, 0, 16'h4040));  // 3.0
    run(mk(OP_MUL_REAL, 12, 10, 11, 0));
    run(mk(OP_MUL_IMAG, 13, 10, 11, 0));
    save_check(4, 12, 0, SHMEM_AW'(ROW * 16 + ID), 32'hC090_0000, "mul_real");
    save_check(4, 13, 0, SHMEM_AW'(ROW * 16 + ID), 32'h40D0_0000, "mul_imag");
    // coeff_dis: a lod_coeff of (1.0, 3.0) is ignored while disabled.
    run(mk(OP_COEFF_DIS, 0, 0, 0, 0));
    run(mk(OP_LOD_COEFF, 0, 10, 11, 0));
    run(mk(OP_COEFF_EN, 0, 0, 0, 0));
    run(mk(OP_MUL_REAL, 12, 10, 11, 0));
    save_check(4, 12, 0, SHMEM_AW'(ROW * 16 + ID), 32'hC090_0000, "coeff_dis hold");
    // Enabled again: lod_coeff of (1.0, 3.0) takes effect: (1+3j)(1+3j) = -8+6j.
    run(mk(OP_LOD_COEFF, 0, 10, 11, 0));
    run(mk(OP_MUL_REAL, 12, 10, 11, 0));
    run(mk(OP_MUL_IMAG, 13, 10, 11, 0));
    save_check(4, 12, 0, SHMEM_AW'(ROW * 16 + ID), 32'hC100_0000, "mul_real 2");
    save_check(4, 13, 0, SHMEM_AW'(ROW * 16 + ID), 32'h40C0_0000, "mul_imag 2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
