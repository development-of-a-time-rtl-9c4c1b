// tb_memory_module: self-checking test of memory_module, with DEPTH = 64
// words so that the full condition is reached quickly.
//
// Sends bursts of random words with gaps, more than fit, then checks: the
// word count after each clock, that words are stored in arrival order from
// address 0, that words arriving when full are not written but counted as
// dropped, the one-clock read latency of the host port, and that host_clear
// empties the memory so that the next run starts again at address 0.
module tb_memory_module;
  timeunit 1ns; timeprecision 100ps;
  import tpc_pkg::*;

  localparam int unsigned DEPTH = 64;
  localparam int unsigned AW    = 6;

  logic              clk = 1'b0;
  logic              rst_n;
  logic              link_valid;
  logic [WORD_W-1:0] link_data;
  logic              host_clear, host_rd_en;
  logic [AW-1:0]     host_rd_addr;
  logic [WORD_W-1:0] host_rd_data;
  logic              host_rd_valid;
  logic [AW:0]       word_count;
  logic              full;
  logic [31:0]       dropped_count;
  int checks = 0, failures = 0;

  memory_module #(.DEPTH(DEPTH)) dut (.*);

  always #12.5 clk = ~clk;

  logic [31:0] sent [$];
  int exp_count, exp_drop;

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL: %s = %0d, expected %0d", what, got, exp);
    end
  endtask

  task automatic send_words(int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      link_valid = ($urandom_range(3) != 0);
      link_data  = $urandom;
      if (link_valid) begin
        if (exp_count < int'(DEPTH)) begin sent.push_back(link_data); exp_count++; end
        else exp_drop++;
      end
      @(posedge clk); #1;
      expect_eq("word_count", longint'(word_count), longint'(exp_count));
      expect_eq("dropped_count", longint'(dropped_count), longint'(exp_drop));
      expect_eq("full", longint'(full), longint'(exp_count == int'(DEPTH)));
    end
    @(negedge clk) link_valid = 1'b0;
  endtask

  task automatic read_all();
    for (int a = 0; a < sent.size(); a++) begin
      @(negedge clk);
      host_rd_en = 1'b1; host_rd_addr = AW'(a);
      @(posedge clk); #1;
      host_rd_en = 1'b0;
      expect_eq("host_rd_valid", longint'(host_rd_valid), longint'(1));
      expect_eq("stored word", longint'(host_rd_data), longint'(sent[a]));
      @(posedge clk); #1;
      expect_eq("host_rd_valid low", longint'(host_rd_valid), longint'(0));
    end
  endtask

  initial begin
    rst_n = 1'b0; link_valid = 1'b0; link_data = '0;
    host_clear = 1'b0; host_rd_en = 1'b0; host_rd_addr = '0;
    exp_count = 0; exp_drop = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    send_words(30);           // partly filled
    read_all();
    send_words(80);           // runs into full, words dropped
    expect_eq("reached full", longint'(full), longint'(1));
    checks++; if (exp_drop == 0) begin failures++; $display("FAIL: no word dropped"); end
    read_all();
    // clear and start again
    @(negedge clk) host_clear = 1'b1;
    @(negedge clk) host_clear = 1'b0;
    sent.delete(); exp_count = 0; exp_drop = 0;
    expect_eq("count after clear", longint'(word_count), longint'(0));
    expect_eq("dropped after clear", longint'(dropped_count), longint'(0));
    send_words(20);
    read_all();
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
