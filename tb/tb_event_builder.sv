// tb_event_builder: self-checking test of event_builder (WINDOW = 128).
//
// Drives triggers and random X/Y clusters (each side hit or not, random
// positions and counts up to 300 so that width saturation occurs) for a few
// thousand clocks. A reference model written here tracks the expected
// event number, window and clock counter and predicts, for every clock, the
// word (header, hit word or none) that must appear one clock later. It also
// counts that each rule was exercised: header on trigger, hit word on X-and-Y
// coincidence, single-side clusters dropped, window closing after 128 clocks,
// trigger ignored during a window and width saturation.
module tb_event_builder;
  timeunit 1ns; timeprecision 100ps;
  import tpc_pkg::*;

  localparam int unsigned WINDOW = 128;

  logic              clk = 1'b0;
  logic              rst_n;
  logic              trigger;
  cluster_t          x_cluster, y_cluster;
  logic              word_valid;
  logic [WORD_W-1:0] word;
  logic [EVT_W-1:0]  event_number;
  logic              busy;
  int checks = 0, failures = 0;

  event_builder #(.WINDOW(WINDOW)) dut (.*);

  always #12.5 clk = ~clk;

  // reference model state
  bit m_trig_q = 0, m_busy = 0;
  int m_cc = 0, m_evn = 0;
  int n_header = 0, n_hit = 0, n_single = 0, n_close = 0, n_retrig = 0, n_sat = 0;

  function automatic cluster_t rand_cluster();
    cluster_t c;
    c.valid = ($urandom_range(3) != 0);
    c.pos   = POS_W'($urandom_range(510));
    c.count = c.valid ? CNT_W'(1 + $urandom_range(c.pos[0] ? 299 : 5)) : '0;
    if (c.count > 256) c.count = 256;
    return c;
  endfunction

  function automatic int satw(int n);
    return n > 7 ? 7 : n;
  endfunction

  initial begin
    bit exp_valid;
    logic [31:0] exp_word;
    rst_n = 1'b0; trigger = 1'b0; x_cluster = '0; y_cluster = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      // trigger pulses of 1..3 clocks, now and then, some inside a window
      if (!trigger) trigger = ($urandom_range(60) == 0);
      else          trigger = ($urandom_range(2) != 0);
      x_cluster = rand_cluster();
      y_cluster = rand_cluster();
      // predict
      exp_valid = 0; exp_word = '0;
      if (!m_busy) begin
        if (trigger && !m_trig_q) begin
          exp_valid = 1; exp_word = {1'b0, 31'(m_evn)};
          m_evn++; m_busy = 1; m_cc = 0; n_header++;
        end
      end else begin
        if (trigger && !m_trig_q) n_retrig++;
        if (x_cluster.valid && y_cluster.valid) begin
          exp_valid = 1;
          exp_word  = {1'b1, x_cluster.pos, y_cluster.pos, 3'(satw(int'(x_cluster.count))),
                       3'(satw(int'(y_cluster.count))), 7'(m_cc)};
          n_hit++;
          if (x_cluster.count > 7 || y_cluster.count > 7) n_sat++;
        end else if (x_cluster.valid || y_cluster.valid) n_single++;
        if (m_cc == int'(WINDOW) - 1) begin m_busy = 0; n_close++; end
        m_cc++;
      end
      m_trig_q = trigger;
      @(posedge clk); #1;
      checks++;
      if (word_valid !== exp_valid || (exp_valid && word !== exp_word)) begin
        failures++;
        if (failures < 10)
          $display("FAIL cycle %0d: got valid=%0d word=%h, expected valid=%0d word=%h",
                   c, word_valid, word, exp_valid, exp_word);
      end
      checks++;
      if (busy !== m_busy || int'(event_number) != m_evn) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d: busy/event_number mismatch", c);
      end
    end
    $display("exercised: headers=%0d hits=%0d single_side=%0d windows_closed=%0d retriggers=%0d saturated=%0d",
             n_header, n_hit, n_single, n_close, n_retrig, n_sat);
    checks++;
    if (n_header == 0 || n_hit == 0 || n_single == 0 || n_close == 0 || n_retrig == 0 || n_sat == 0) begin
      failures++;
      $display("FAIL: a rule was never exercised");
    end
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
