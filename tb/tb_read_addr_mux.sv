// tb_read_addr_mux: for each group g, bank j must receive the address of SP
// 4g+j (SPs j, j+4, j+8, j+12 share bank j).
module tb_read_addr_mux;
  logic [13:0] sp_addr [16];
  logic [1:0]  group;
  logic [13:0] rd_addr_to_shr [4];
  int checks = 0, failures = 0;

  read_addr_mux dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int trial = 0; trial < 20; trial++) begin
      for (int k = 0; k < 16; k++) sp_addr[k] = 14'($urandom);
      for (int g = 0; g < 4; g++) begin
        group = 2'(g);
        #1;
        for (int j = 0; j < 4; j++) begin
          checks++;
          if (rd_addr_to_shr[j] !== sp_addr[g * 4 + j]) begin
            failures++;
            $display("FAIL g=%0d bank=%0d", g, j);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
