// tb_micro_tpc_full: the readout at its full default size (256 + 256 strips,
// 128-clock window, 2**23-word = 32 MByte memory) through one complete run.
//
// Records 20 triggered track events, then reads every stored word back over
// the host port and compares it with the reference model's stream; checks
// the word count, the event number and that nothing was dropped. The memory
// is not filled here (that takes 8 M words); overflow is covered by
// tb_micro_tpc_readout with a smaller memory.
module tb_micro_tpc_full;
  timeunit 1ns; timeprecision 100ps;
  import tpc_pkg::*;
  import tpc_tb_pkg::*;

  localparam int unsigned NS = 256;
  localparam int unsigned AW = 23;

  logic              clk = 1'b0;
  logic              rst_n;
  logic [NS-1:0]     anode_disc, cathode_disc;
  logic              trigger;
  logic              link_valid;
  logic [WORD_W-1:0] link_data;
  logic [EVT_W-1:0]  event_number;
  logic              busy;
  logic              host_clear, host_rd_en;
  logic [AW-1:0]     host_rd_addr;
  logic [WORD_W-1:0] host_rd_data;
  logic              host_rd_valid;
  logic [AW:0]       word_count;
  logic              mem_full;
  logic [31:0]       dropped_count;
  int checks = 0, failures = 0;

  micro_tpc_readout dut (.*);

  always #12.5 clk = ~clk;

  logic [31:0] expected [$];
  pem_model model;
  track_gen gen;

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL: %s = %0d (%h), expected %0d (%h)", what, got, got, exp, exp);
    end
  endtask

  initial begin
    logic [31:0] w;
    model = new(128);
    gen   = new();
    rst_n = 1'b0; anode_disc = '0; cathode_disc = '0; trigger = 1'b0;
    host_clear = 1'b0; host_rd_en = 1'b0; host_rd_addr = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int ev = 0; ev < 20; ev++) begin
      for (int c = 0; c < 200; c++) begin
        @(negedge clk);
        trigger = (c < 2);
        if (c == 2) gen.start(20 + int'($urandom_range(60)));
        gen.next(anode_disc, cathode_disc);
        if (model.step(trigger, anode_disc, cathode_disc, w)) expected.push_back(w);
      end
    end
    repeat (10) @(negedge clk);
    expect_eq("event_number", longint'(event_number), longint'(20));
    expect_eq("word_count", longint'(word_count), longint'(expected.size()));
    expect_eq("dropped_count", longint'(dropped_count), longint'(0));
    expect_eq("not full", longint'(mem_full), longint'(0));
    for (int a = 0; a < expected.size(); a++) begin
      @(negedge clk);
      host_rd_en = 1'b1; host_rd_addr = AW'(a);
      @(negedge clk);
      host_rd_en = 1'b0;
      expect_eq($sformatf("word at %0d", a), longint'(host_rd_data), longint'(expected[a]));
    end
    $display("events=%0d words=%0d hits=%0d", model.n_header, expected.size(), model.n_hit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
