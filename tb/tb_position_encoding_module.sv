// tb_position_encoding_module: self-checking test of the position encoding
// module at its full size (256 anode + 256 cathode strips, 128-clock window).
//
// Generates triggered events with straight tracks (see tpc_tb_pkg), noise
// between events and now and then a second trigger inside a window. The
// reference model predicts the word for every sampled clock; the test checks
// that exactly that word (or none) leaves the module LATENCY = SYNC_STAGES+2
// = 4 clock edges after the edge that sampled the strips, which checks the latency and
// that a word can leave in every clock (40 M words/s). It fails if any rule
// of the model never fired.
module tb_position_encoding_module;
  timeunit 1ns; timeprecision 100ps;
  import tpc_pkg::*;
  import tpc_tb_pkg::*;

  localparam int unsigned NS = 256;
  localparam int unsigned WINDOW = 128;
  localparam int unsigned LATENCY = 4;

  logic              clk = 1'b0;
  logic              rst_n;
  logic [NS-1:0]     anode_disc, cathode_disc;
  logic              trigger;
  logic              word_valid;
  logic [WORD_W-1:0] word;
  logic [EVT_W-1:0]  event_number;
  logic              busy;
  int checks = 0, failures = 0;
  int max_run = 0, run = 0;

  position_encoding_module dut (.*);

  always #12.5 clk = ~clk;

  typedef struct { bit v; logic [31:0] w; } exp_t;
  exp_t q [$];
  pem_model model;
  track_gen gen;

  initial begin
    exp_t e;
    int gap, trig_len, track_delay;
    model = new(WINDOW);
    gen   = new();
    rst_n = 1'b0; anode_disc = '0; cathode_disc = '0; trigger = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    gap = 5; trig_len = 0; track_delay = -1;
    for (int c = 0; c < 6000; c++) begin
      @(negedge clk);
      // event scheduling
      if (trig_len > 0) begin trigger = 1'b1; trig_len--; end
      else trigger = 1'b0;
      if (gap == 0) begin
        trig_len = 2; gap = 140 + int'($urandom_range(120));
        track_delay = int'($urandom_range(3));
      end else gap--;
      if (track_delay == 0) gen.start(20 + int'($urandom_range(60)));
      if (track_delay >= 0) track_delay--;
      if (!busy && gap == 60 && $urandom_range(3) == 0) trig_len = 1;       // trigger between events
      if (busy && gap == 100 && $urandom_range(1) == 0) trig_len = 1;      // retrigger inside window
      gen.next(anode_disc, cathode_disc);
      e.v = model.step(trigger, anode_disc, cathode_disc, e.w);
      q.push_back(e);
      @(posedge clk); #1;
      if (q.size() > LATENCY) begin
        e = q.pop_front();
        checks++;
        if (word_valid !== e.v || (e.v && word !== e.w)) begin
          failures++;
          if (failures < 10)
            $display("FAIL cycle %0d: got valid=%0d word=%h, expected valid=%0d word=%h",
                     c, word_valid, word, e.v, e.w);
        end
      end
      run = word_valid ? run + 1 : 0;
      if (run > max_run) max_run = run;
    end
    checks++;
    if (int'(event_number) != model.evn) begin failures++; $display("FAIL: event_number"); end
    $display("exercised: headers=%0d hits=%0d single_side=%0d windows_closed=%0d retriggers=%0d saturated=%0d longest_word_run=%0d",
             model.n_header, model.n_hit, model.n_single, model.n_close, model.n_retrig, model.n_sat, max_run);
    checks++;
    if (model.n_header == 0 || model.n_hit == 0 || model.n_single == 0 || model.n_close == 0 ||
        model.n_retrig == 0 || model.n_sat == 0 || max_run < 10) begin
      failures++;
      $display("FAIL: a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
