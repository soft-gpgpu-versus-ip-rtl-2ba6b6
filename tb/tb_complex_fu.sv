// tb_complex_fu: random operands in each mode, one per cycle, compared three
// edges later with A*B + C*D computed from reals (fp_ref_pkg) using the
// port routing of each mode.  Also a few fixed cases, including a complex
// multiply (1+2j)(3+4j) = -5+10j.
module tb_complex_fu;
  import egpu_pkg::*;
  import fp_ref_pkg::*;
  logic clk = 0;
  fu_mode_e mode;
  logic [31:0] ra, rb, tw_re, tw_im, result;
  int checks = 0, failures = 0;
  logic [31:0] expq [$];

  complex_fu dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] neg(input logic [31:0] x);
    return {~x[31], x[30:0]};
  endfunction

  function automatic logic [31:0] expect_of(fu_mode_e m, logic [31:0] a, logic [31:0] b,
                                            logic [31:0] tr, logic [31:0] ti);
    case (m)
      FU_MUL:      return ref_dot2(a, b, 32'd0, 32'd0);
      FU_ADD:      return ref_add(a, b);
      FU_SUB:      return ref_add(a, neg(b));
      FU_MUL_REAL: return ref_dot2(a, tr, ti, neg(b));
      default:     return ref_dot2(a, ti, tr, b);
    endcase
  endfunction

  int n = 0;
  task automatic drive(fu_mode_e m, logic [31:0] a, logic [31:0] b, logic [31:0] tr, logic [31:0] ti);
    mode = m; ra = a; rb = b; tw_re = tr; tw_im = ti;
    expq.push_back(expect_of(m, a, b, tr, ti));
    @(posedge clk); #1;
    n++;
    if (n >= 3) check();
  endtask

  task automatic check();
    logic [31:0] e;
    e = expq.pop_front();
    checks++;
    if (result !== e) begin
      failures++;
      $display("FAIL got %h exp %h", result, e);
    end
  endtask

  initial begin
    mode = FU_MUL; ra = 0; rb = 0; tw_re = 0; tw_im = 0;
    @(posedge clk); #1;
    // Fixed cases.
    drive(FU_MUL, 32'h3FC00000, 32'h40000000, 0, 0);              // 1.5*2 = 3
    drive(FU_ADD, 32'h3FC00000, 32'h40000000, 0, 0);              // 3.5
    drive(FU_SUB, 32'h3FC00000, 32'h40000000, 0, 0);              // -0.5
    drive(FU_MUL_REAL, 32'h3F800000, 32'h40000000, 32'h40400000, 32'h40800000); // 1*3-2*4 = -5
    drive(FU_MUL_IMAG, 32'h3F800000, 32'h40000000, 32'h40400000, 32'h40800000); // 1*4+2*3 = 10
    drive(FU_SUB, 32'h40000000, 32'h40000000, 0, 0);              // +0
    for (int i = 0; i < 2000; i++) begin
      fu_mode_e m;
      m = fu_mode_e'($urandom % 5);
      drive(m, rand_f32(20), rand_f32(20), rand_f32(20), rand_f32(20));
    end
    // Cancellation-heavy adds: close exponents.
    for (int i = 0; i < 500; i++) begin
      logic [31:0] a;
      a = rand_f32(3);
      drive(FU_SUB, a, a ^ 32'(1 << ($urandom % 8)), 0, 0);
    end
    repeat (2) begin @(posedge clk); #1; check(); end
    // Known values of the fixed cases were checked above through the model;
    // confirm the model itself on them.
    checks++;
    if (ref_dot2(32'h3F800000, 32'h40400000, 32'h40800000, 32'hC0000000) !== 32'hC0A00000) begin
      failures++; $display("FAIL reference model");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
