// tb_sram_bank: self-checking test of sram_bank at its full size
// (2**23 words of 32 bits, 32 MByte).
//
// Writes random data to random addresses, including the first and last
// word, keeps a copy in an associative array, then reads every written
// address back and checks the data one clock after rd_en. Also checks that a
// cycle without wr_en leaves the memory unchanged and that a write and a
// read of different addresses in the same clock do not disturb each other.
module tb_sram_bank;
  timeunit 1ns; timeprecision 100ps;

  localparam int unsigned DEPTH = 32'd1 << 23;
  localparam int unsigned AW    = 23;

  logic          clk = 1'b0;
  logic          wr_en, rd_en;
  logic [AW-1:0] wr_addr, rd_addr;
  logic [31:0]   wr_data, rd_data;
  int checks = 0, failures = 0;
  logic [31:0] ref_mem [int];

  sram_bank dut (.*);

  always #12.5 clk = ~clk;

  task automatic write(logic [AW-1:0] a, logic [31:0] d);
    @(negedge clk);
    wr_en = 1'b1; wr_addr = a; wr_data = d;
    ref_mem[int'(a)] = d;
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  task automatic read_check(logic [AW-1:0] a);
    @(negedge clk);
    rd_en = 1'b1; rd_addr = a;
    @(negedge clk);
    rd_en = 1'b0;
    checks++;
    if (rd_data !== ref_mem[int'(a)]) begin
      failures++;
      $display("FAIL: addr %0h read %h expected %h", a, rd_data, ref_mem[int'(a)]);
    end
  endtask

  initial begin
    int a;
    wr_en = 1'b0; rd_en = 1'b0; wr_addr = '0; rd_addr = '0; wr_data = '0;
    write('0, 32'hCAFE_0001);
    write(AW'(DEPTH - 1), 32'h5EED_FFFF);
    for (int i = 0; i < 300; i++) write(AW'($urandom_range(DEPTH - 1)), $urandom);
    // a cycle with data but no write enable must change nothing
    @(negedge clk); wr_en = 1'b0; wr_addr = '0; wr_data = 32'hDEAD_BEEF;
    @(negedge clk);
    foreach (ref_mem[k]) read_check(AW'(k));
    // simultaneous write and read of different addresses
    @(negedge clk);
    wr_en = 1'b1; wr_addr = 23'h12345; wr_data = 32'h0BAD_F00D;
    rd_en = 1'b1; rd_addr = AW'(DEPTH - 1);
    @(negedge clk);
    wr_en = 1'b0; rd_en = 1'b0;
    ref_mem[32'h12345] = 32'h0BAD_F00D;
    checks++;
    if (rd_data !== 32'h5EED_FFFF) begin failures++; $display("FAIL: read during write"); end
    read_check(23'h12345);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #500us;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
