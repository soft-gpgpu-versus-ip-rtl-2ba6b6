// tb_write_port_mux: standard mode sends SP sel to all four banks; bank
// mode with sel = {g,00} sends SP 4g+j to bank j.
module tb_write_port_mux;
  logic [31:0] d [16];
  logic [3:0]  sel;
  logic        bank_mode;
  logic [31:0] q [4];
  int checks = 0, failures = 0;

  write_port_mux dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int trial = 0; trial < 10; trial++) begin
      for (int k = 0; k < 16; k++) d[k] = $urandom;
      bank_mode = 0;
      for (int k = 0; k < 16; k++) begin
        sel = 4'(k);
        #1;
        for (int j = 0; j < 4; j++) begin
          checks++;
          if (q[j] !== d[k]) begin failures++; $display("FAIL std sp=%0d bank=%0d", k, j); end
        end
      end
      bank_mode = 1;
      for (int g = 0; g < 4; g++) begin
        sel = {2'(g), 2'b00};
        #1;
        for (int j = 0; j < 4; j++) begin
          checks++;
          if (q[j] !== d[g * 4 + j]) begin failures++; $display("FAIL bank g=%0d bank=%0d", g, j); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
