// tb_shared_memory: checks the four-bank shared memory: a global write lands
// in all four banks, per-bank SM writes land only in their own bank, the
// global write overrides an SM write, and rd_en_to_shr switches the read
// addresses between the SM and the global port.
module tb_shared_memory;
  localparam int AW = 14;
  logic clk = 0;
  logic [31:0] data_to_shr [4];
  logic [AW-1:0] wr_addr_to_shr [4];
  logic [AW-1:0] rd_addr_to_shr [4];
  logic we_to_shr, rd_en_to_shr, global_wr_en;
  logic [31:0] global_data_in;
  logic [AW-1:0] global_wr_addr, global_rd_addr;
  logic [31:0] data_out [4];
  int checks = 0, failures = 0;
  logic [31:0] model [4][logic [AW-1:0]];

  shared_memory dut (.*);

  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle();
    we_to_shr = 0; global_wr_en = 0; rd_en_to_shr = 0;
  endtask

  // Read addr from all banks through the global port.
  task automatic check_global(input logic [AW-1:0] a);
    global_rd_addr = a; rd_en_to_shr = 0;
    @(posedge clk); #1; @(posedge clk); #1;
    for (int b = 0; b < 4; b++) begin
      checks++;
      if (data_out[b] !== model[b][a]) begin
        failures++;
        $display("FAIL global read bank %0d addr %0h got %h exp %h", b, a, data_out[b], model[b][a]);
      end
    end
  endtask

  initial begin
    logic [AW-1:0] a [4];
    idle();
    global_rd_addr = 0; global_wr_addr = 0; global_data_in = 0;
    for (int b = 0; b < 4; b++) begin data_to_shr[b] = 0; wr_addr_to_shr[b] = 0; rd_addr_to_shr[b] = 0; end
    @(posedge clk); #1;
    // Global writes: all banks.
    for (int i = 0; i < 16; i++) begin
      global_wr_en = 1; global_wr_addr = AW'(i * 1000 + 3); global_data_in = $urandom;
      for (int b = 0; b < 4; b++) model[b][global_wr_addr] = global_data_in;
      @(posedge clk); #1;
    end
    idle();
    for (int i = 0; i < 16; i++) check_global(AW'(i * 1000 + 3));
    // SM per-bank writes (save_bank style): different address and data per bank.
    for (int i = 0; i < 16; i++) begin
      we_to_shr = 1;
      for (int b = 0; b < 4; b++) begin
        wr_addr_to_shr[b] = AW'(i * 1000 + 3);
        data_to_shr[b]    = {8'(b), 24'($urandom)};
        model[b][wr_addr_to_shr[b]] = data_to_shr[b];
      end
      @(posedge clk); #1;
    end
    idle();
    for (int i = 0; i < 16; i++) check_global(AW'(i * 1000 + 3));
    // Global write overrides SM write in the same cycle.
    we_to_shr = 1; global_wr_en = 1; global_wr_addr = 14'd77; global_data_in = 32'hCAFE_F00D;
    for (int b = 0; b < 4; b++) begin wr_addr_to_shr[b] = 14'd88; data_to_shr[b] = 32'h1111_1111; end
    for (int b = 0; b < 4; b++) model[b][14'd77] = 32'hCAFE_F00D;
    @(posedge clk); #1; idle();
    check_global(14'd77);
    // SM reads: each bank its own address.
    rd_en_to_shr = 1;
    for (int b = 0; b < 4; b++) rd_addr_to_shr[b] = AW'((b + 1) * 1000 + 3);
    global_rd_addr = 14'd77;
    @(posedge clk); #1; @(posedge clk); #1;
    for (int b = 0; b < 4; b++) begin
      checks++;
      if (data_out[b] !== model[b][AW'((b + 1) * 1000 + 3)]) begin
        failures++; $display("FAIL sm read bank %0d", b);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
