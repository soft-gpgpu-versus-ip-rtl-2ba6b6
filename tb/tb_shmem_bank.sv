// tb_shmem_bank: checks one shared-memory bank: random writes, reads two
// edges after the address, and old data on a read of a word written in the
// same cycle.  A shadow array holds the expected contents.
module tb_shmem_bank;
  localparam int DEPTH = 16384;
  localparam int AW    = 14;
  logic clk = 0;
  logic we;
  logic [AW-1:0] waddr, raddr;
  logic [31:0] wdata, rdata;
  int checks = 0, failures = 0;
  logic [31:0] shadow [logic [AW-1:0]];

  shmem_bank #(.DEPTH(DEPTH), .WIDTH(32)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_read(input logic [AW-1:0] a, input logic [31:0] exp);
    raddr = a;
    we    = 0;
    @(posedge clk);
    #1 raddr = $urandom;
    @(posedge clk);
    #1;
    checks++;
    if (rdata !== exp) begin
      failures++;
      $display("FAIL addr %0h got %h exp %h", a, rdata, exp);
    end
  endtask

  initial begin
    logic [AW-1:0] a;
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    @(posedge clk); #1;
    // Fill addresses 0..DEPTH-1 stride 97 plus the two ends.
    for (int i = 0; i < 200; i++) begin
      a = AW'(i * 97);
      we = 1; waddr = a; wdata = $urandom;
      shadow[a] = wdata;
      @(posedge clk); #1;
    end
    we = 1; waddr = 0; wdata = 32'hDEAD_0000; shadow[0] = wdata; @(posedge clk); #1;
    we = 1; waddr = AW'(DEPTH - 1); wdata = 32'hBEEF_FFFF; shadow[AW'(DEPTH-1)] = wdata; @(posedge clk); #1;
    we = 0;
    foreach (shadow[k]) check_read(k, shadow[k]);
    // Read-during-write: address presented with the write returns new data.
    a = AW'(5 * 97);
    we = 1; waddr = a; wdata = 32'h1234_5678; raddr = a;
    @(posedge clk); #1;
    we = 0;
    @(posedge clk); #1;
    checks++;
    shadow[a] = 32'h1234_5678;
    if (rdata !== shadow[a]) begin failures++; $display("FAIL rdw %h exp %h", rdata, shadow[a]); end
    check_read(a, shadow[a]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
