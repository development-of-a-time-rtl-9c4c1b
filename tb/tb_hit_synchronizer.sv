// tb_hit_synchronizer: self-checking test of hit_synchronizer.
//
// Drives random 256-bit strip patterns, one per clock, and checks that each
// appears unchanged at sync_out exactly STAGES (2) clocks later, and that
// reset clears the output. A reference queue of past inputs gives the
// expected values.
module tb_hit_synchronizer;
  timeunit 1ns; timeprecision 100ps;

  localparam int unsigned WIDTH  = 256;
  localparam int unsigned STAGES = 2;

  logic             clk = 1'b0;
  logic             rst_n;
  logic [WIDTH-1:0] async_in;
  logic [WIDTH-1:0] sync_out;
  int checks = 0, failures = 0;

  hit_synchronizer dut (.*);

  always #12.5 clk = ~clk;   // 40 MHz

  function automatic logic [WIDTH-1:0] rand_vec();
    logic [WIDTH-1:0] v;
    for (int i = 0; i < int'(WIDTH); i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  logic [WIDTH-1:0] hist [$];

  initial begin
    rst_n    = 1'b0;
    async_in = rand_vec();
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (sync_out !== '0) begin failures++; $display("FAIL: output not cleared by reset"); end
    rst_n = 1'b1;
    for (int c = 0; c < 200; c++) begin
      @(negedge clk);
      async_in = rand_vec();
      hist.push_back(async_in);
      @(posedge clk); #1;
      if (hist.size() > STAGES) void'(hist.pop_front());
      if (hist.size() == STAGES) begin
        checks++;
        if (sync_out !== hist[0]) begin
          failures++;
          $display("FAIL cycle %0d: sync_out differs from input %0d clocks earlier", c, STAGES);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100us;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
