// tb_sp_regfile: random writes, then reads on both ports checked two edges
// after the address against a shadow copy.
module tb_sp_regfile;
  logic clk = 0;
  logic [10:0] raddr_a, raddr_b, waddr;
  logic [31:0] rdata_a, rdata_b, wdata;
  logic we;
  logic [31:0] shadow [2048];
  int checks = 0, failures = 0;

  sp_regfile dut (.*);

  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [10:0] qa [$], qb [$];
    we = 0; raddr_a = 0; raddr_b = 0; waddr = 0; wdata = 0;
    for (int i = 0; i < 2048; i++) begin
      we = 1; waddr = 11'(i); wdata = $urandom; shadow[i] = wdata;
      @(posedge clk); #1;
    end
    we = 0;
    // Pipelined reads: one pair per cycle, result two edges later.
    for (int i = 0; i < 300 + 2; i++) begin
      if (i < 300) begin
        raddr_a = 11'($urandom); raddr_b = 11'($urandom);
        qa.push_back(raddr_a); qb.push_back(raddr_b);
      end
      @(posedge clk); #1;
      if (i >= 1 && qa.size() > 0 && i < 301) begin
        logic [10:0] ea, eb;
        ea = qa.pop_front(); eb = qb.pop_front();
        checks += 2;
        if (rdata_a !== shadow[ea]) begin failures++; $display("FAIL a %0d", ea); end
        if (rdata_b !== shadow[eb]) begin failures++; $display("FAIL b %0d", eb); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
