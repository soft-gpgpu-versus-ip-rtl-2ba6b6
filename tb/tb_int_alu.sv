// tb_int_alu: every operation on random operands against SystemVerilog
// operators, plus FP negation by XOR with 80000000.
module tb_int_alu;
  import egpu_pkg::*;
  int_op_e op;
  logic [31:0] a, b, y, e;
  int checks = 0, failures = 0;

  int_alu dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 800; i++) begin
      op = int_op_e'(i % 8);
      a = $urandom; b = $urandom;
      #1;
      case (op)
        INT_ADD: e = a + b;
        INT_SUB: e = a - b;
        INT_AND: e = a & b;
        INT_OR:  e = a | b;
        INT_XOR: e = a ^ b;
        INT_SHL: e = a << (b % 32);
        INT_SHR: e = a >> (b % 32);
        default: e = 32'(longint'(a) * longint'(b));
      endcase
      checks++;
      if (y !== e) begin failures++; $display("FAIL op %0d a %h b %h y %h exp %h", op, a, b, y, e); end
    end
    op = INT_XOR; a = 32'h3F80_0000; b = 32'h8000_0000; #1;
    checks++;
    if (y !== 32'hBF80_0000) begin failures++; $display("FAIL negate"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
