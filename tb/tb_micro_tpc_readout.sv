// tb_micro_tpc_readout: end-to-end test of the readout, discriminator
// inputs to words read back from the memory module by the host.
//
// Runs at 256 + 256 strips and a 128-clock window, but with the memory
// reduced to MEM_DEPTH = 512 words so that it fills within the test.
// Phase 1 sends triggered track events, noise and stray triggers until the
// memory is full and words are dropped; the host then reads every address
// and each stored word must equal the reference model's stream, in order.
// Phase 2 clears the memory from the host side, records a few more events
// and reads them back from address 0. The test counts how often each
// mechanism happened (header, hit word, single-side clock dropped, window
// closed, trigger ignored in a window, width saturated, memory full, word
// dropped, clear) and fails if one never did.
module tb_micro_tpc_readout;
  timeunit 1ns; timeprecision 100ps;
  import tpc_pkg::*;
  import tpc_tb_pkg::*;

  localparam int unsigned NS        = 256;
  localparam int unsigned WINDOW    = 128;
  localparam int unsigned MEM_DEPTH = 512;
  localparam int unsigned AW        = 9;

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
  int n_full = 0, n_clear = 0;

  micro_tpc_readout #(.MEM_DEPTH(MEM_DEPTH)) dut (.*);

  always #12.5 clk = ~clk;

  logic [31:0] expected [$];
  pem_model model;
  track_gen gen;
  int gap, trig_len, track_delay;

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL: %s = %0d (%h), expected %0d (%h)", what, got, got, exp, exp);
    end
  endtask

  // Drive one clock of detector activity and feed the model.
  task automatic drive_clock();
    logic [31:0] w;
    @(negedge clk);
    if (trig_len > 0) begin trigger = 1'b1; trig_len--; end
    else trigger = 1'b0;
    if (gap == 0) begin
      trig_len = 2; gap = 140 + int'($urandom_range(120));
      track_delay = int'($urandom_range(3));
    end else gap--;
    if (track_delay == 0) gen.start(20 + int'($urandom_range(60)));
    if (track_delay >= 0) track_delay--;
    if (busy && gap == 100 && $urandom_range(1) == 0) trig_len = 1;
    gen.next(anode_disc, cathode_disc);
    if (model.step(trigger, anode_disc, cathode_disc, w)) expected.push_back(w);
  endtask

  task automatic idle(int n);
    repeat (n) begin
      @(negedge clk);
      trigger = 1'b0; anode_disc = '0; cathode_disc = '0;
    end
  endtask

  task automatic read_back(int n);
    for (int a = 0; a < n; a++) begin
      @(negedge clk);
      host_rd_en = 1'b1; host_rd_addr = AW'(a);
      @(negedge clk);
      host_rd_en = 1'b0;
      expect_eq($sformatf("word at %0d", a), longint'(host_rd_data), longint'(expected[a]));
    end
  endtask

  initial begin
    model = new(WINDOW);
    gen   = new();
    rst_n = 1'b0; anode_disc = '0; cathode_disc = '0; trigger = 1'b0;
    host_clear = 1'b0; host_rd_en = 1'b0; host_rd_addr = '0;
    gap = 5; trig_len = 0; track_delay = -1;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // ---- phase 1: fill the memory and overflow it
    while (expected.size() < int'(MEM_DEPTH) + 100) drive_clock();
    while (busy || trig_len > 0) drive_clock();
    idle(10);
    expect_eq("memory full", longint'(mem_full), longint'(1));
    if (mem_full) n_full++;
    expect_eq("word_count", longint'(word_count), longint'(MEM_DEPTH));
    expect_eq("dropped_count", longint'(dropped_count), longint'(expected.size()) - longint'(MEM_DEPTH));
    expect_eq("event_number", longint'(event_number), longint'(model.evn));
    read_back(MEM_DEPTH);

    // ---- phase 2: clear and record a few more events
    @(negedge clk) host_clear = 1'b1;
    @(negedge clk) host_clear = 1'b0;
    n_clear++;
    expect_eq("count after clear", longint'(word_count), longint'(0));
    expect_eq("dropped after clear", longint'(dropped_count), longint'(0));
    expected.delete();
    gap = 2;
    repeat (700) drive_clock();
    while (busy || trig_len > 0) drive_clock();
    idle(10);
    expect_eq("word_count phase 2", longint'(word_count), longint'(expected.size()));
    expect_eq("not full", longint'(mem_full), longint'(0));
    read_back(expected.size());

    $display("exercised: headers=%0d hits=%0d single_side=%0d windows_closed=%0d retriggers=%0d saturated=%0d full=%0d dropped_words=%0d clears=%0d",
             model.n_header, model.n_hit, model.n_single, model.n_close, model.n_retrig, model.n_sat,
             n_full, model.n_header + model.n_hit - int'(MEM_DEPTH) - expected.size(), n_clear);
    checks++;
    if (model.n_header == 0 || model.n_hit == 0 || model.n_single == 0 || model.n_close == 0 ||
        model.n_retrig == 0 || model.n_sat == 0 || n_full == 0 || n_clear == 0) begin
      failures++;
      $display("FAIL: a mechanism was never exercised");
    end
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
