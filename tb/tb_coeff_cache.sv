// tb_coeff_cache: lod writes (wdata presented two cycles after the thread
// index, as the register file delivers it) then a read pass over all
// threads, checked two edges after each thread index; then the clock enable
// is cleared and both writes and the read output must hold.
module tb_coeff_cache;
  logic clk = 0, rst_n = 0;
  logic ce, lod;
  logic [7:0] thread_index;
  logic [31:0] wdata_re, wdata_im, tw_re, tw_im;
  logic [31:0] exp_re [32], exp_im [32];
  int checks = 0, failures = 0;

  coeff_cache dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ce = 1; lod = 0; thread_index = 0; wdata_re = 0; wdata_im = 0;
    for (int t = 0; t < 32; t++) begin exp_re[t] = $urandom; exp_im[t] = $urandom; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // lod_coeff over 32 rows; data follows thread index by two cycles.
    for (int c = 0; c < 34; c++) begin
      lod = (c < 32);
      thread_index = 8'(c);
      wdata_re = (c >= 2) ? exp_re[c - 2] : 32'd0;
      wdata_im = (c >= 2) ? exp_im[c - 2] : 32'd0;
      @(posedge clk); #1;
    end
    lod = 0;
    // Read pass.
    for (int c = 0; c < 34; c++) begin
      thread_index = 8'(c);
      @(posedge clk); #1;
      if (c >= 1 && c <= 32) begin
        checks += 2;
        if (tw_re !== exp_re[c - 1] || tw_im !== exp_im[c - 1]) begin
          failures++;
          $display("FAIL thread %0d got %h/%h", c - 1, tw_re, tw_im);
        end
      end
    end
    // Clock enable off: reading thread 3 then 9 keeps the old output,
    // and a lod of thread 9 is not written.
    thread_index = 3; @(posedge clk); #1; @(posedge clk); #1;
    ce = 0;
    thread_index = 9; lod = 1;
    repeat (2) @(posedge clk);
    #1 wdata_re = 32'hFFFF_0000; wdata_im = 32'h0000_FFFF;
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (tw_re !== exp_re[3]) begin failures++; $display("FAIL ce=0 did not hold output"); end
    lod = 0; ce = 1;
    repeat (4) @(posedge clk);
    #1;
    checks += 2;
    if (tw_re !== exp_re[9] || tw_im !== exp_im[9]) begin
      failures++;
      $display("FAIL write with ce=0 changed entry: %h", tw_re);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
