// tb_sequencer: loads a short program, runs it with a wavefront of 3 rows
// and compares every issued slot with the expected order (rows in order; 4
// sub-cycles per row for a load and save_bank, 16 for save, 1 otherwise,
// coeff_en once), then checks the issue count, that issue is contiguous and
// that done pulses PIPE_DEPTH cycles after the last issue.
module tb_sequencer;
  import egpu_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, imem_we, busy, done;
  logic [ROW_BITS:0] wave_rows;
  logic [PC_BITS-1:0] imem_addr;
  instr_t imem_wdata;
  issue_t issue;
  int checks = 0, failures = 0;
  issue_t expq [$];

  sequencer dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  opcode_e prog [7] = '{OP_COEFF_EN, OP_FADD, OP_LOD, OP_SAVE, OP_SAVE_BANK, OP_NOP, OP_STOP};

  initial begin
    int rows = 3, n_issued = 0, last_issue = 0, cyc = 0, done_cyc = -1;
    start = 0; imem_we = 0; imem_addr = 0; imem_wdata = '0; wave_rows = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 7; i++) begin
      imem_we = 1; imem_addr = PC_BITS'(i);
      imem_wdata = '{op: prog[i], rd: REG_BITS'(i), ra: REG_BITS'(i + 1), rb: REG_BITS'(i + 2), imm: 16'(i)};
      if (prog[i] != OP_STOP) begin
        int nrows;
        nrows = (prog[i] == OP_COEFF_EN) ? 1 : rows;
        for (int r = 0; r < nrows; r++)
          for (int s = 0; s < int'(subs_per_row(prog[i])); s++)
            expq.push_back('{valid: 1'b1, ins: imem_wdata, row: ROW_BITS'(r), sub: 4'(s)});
      end
      @(posedge clk); #1;
    end
    imem_we = 0;
    checks++;
    if (expq.size() != 1 + 3 + 12 + 48 + 12 + 3) begin failures++; $display("FAIL model size"); end
    wave_rows = (ROW_BITS + 1)'(rows); start = 1;
    @(posedge clk); #1 start = 0;
    while (!done && cyc < 500) begin
      @(posedge clk); #1;
      cyc++;
      if (issue.valid) begin
        issue_t e;
        n_issued++;
        last_issue = cyc;
        e = (expq.size() > 0) ? expq.pop_front() : '0;
        checks++;
        if (issue !== e) begin
          failures++;
          $display("FAIL slot %0d: op %0d row %0d sub %0d, expected op %0d row %0d sub %0d",
                   n_issued, issue.ins.op, issue.row, issue.sub, e.ins.op, e.row, e.sub);
        end
      end
      if (done) done_cyc = cyc;
    end
    checks += 4;
    if (n_issued != 79) begin failures++; $display("FAIL issued %0d", n_issued); end
    if (last_issue != n_issued) begin failures++; $display("FAIL issue not contiguous: last %0d", last_issue); end
    if (done_cyc != last_issue + PIPE_DEPTH + 1) begin failures++; $display("FAIL done at %0d, last issue %0d", done_cyc, last_issue); end
    @(posedge clk); #1;
    if (busy || done) begin failures++; $display("FAIL not idle after done"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
