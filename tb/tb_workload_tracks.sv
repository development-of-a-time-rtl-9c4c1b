// tb_workload_tracks: the detector's measurement cases run through the
// whole readout at its default size, with 3D points reconstructed from the
// words read back out of the memory.
//
// Each event is a track given in mm inside the 102.4 mm x 102.4 mm x 80 mm
// drift volume (z = distance from the readout plane). The track is cut into
// fine steps; a step at height z arrives after z / v_drift, with
// v_drift = 4.7 cm/us (argon/ethane 80:20 at about 0.4 kV/cm), i.e. in clock
// floor(z / 1.175 mm) after the trigger. For every clock the anode strips
// under the x of the arriving steps and the cathode strips under their y are
// hit (0.4 mm pitch). Cases:
//   * cosmic muon: straight line through the full 80 mm drift (about 69
//     clocks), also the sustained-rate case: one word every clock;
//   * 85Kr beta electron in a 12 mm drift gap: short bent track, about 11
//     clocks;
//   * Compton electron from a 511 keV gamma: a few cm, bent, mid-volume.
// After all events the host reads the memory. Every hit word is turned back
// into (x, y, z) and must lie within 0.5 mm in x and y of the mean position
// of the steps that arrived in that clock, and in the right drift-time
// clock. The test also checks the number of events and hit words, that every
// track ends inside the 128-clock window, and that the muon's words left the
// encoder back to back (4 x 10^7 words/s).
module tb_workload_tracks;
  timeunit 1ns; timeprecision 100ps;
  import tpc_pkg::*;

  localparam int unsigned NS = 256;
  localparam int unsigned AW = 23;
  localparam real PITCH  = 0.4;     // mm
  localparam real DZ_CLK = 1.175;   // mm of drift per 25 ns clock at 4.7 cm/us
  localparam int  MAXCLK = 128;

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

  // Per event and clock: strip masks and the true mean position.
  typedef struct {
    logic [NS-1:0] amask [MAXCLK];
    logic [NS-1:0] cmask [MAXCLK];
    real           sx [MAXCLK];
    real           sy [MAXCLK];
    int            n  [MAXCLK];
    int            last_clk;
  } event_t;

  event_t events [$];
  int     exp_hit_words = 0;
  int     run = 0, longest_run = 0;

  function automatic void add_segment(ref event_t e, input real x0, y0, z0, x1, y1, z1);
    int steps = 4000;
    for (int s = 0; s <= steps; s++) begin
      real f = real'(s) / real'(steps);
      real x = x0 + f * (x1 - x0), y = y0 + f * (y1 - y0), z = z0 + f * (z1 - z0);
      int  k = int'($floor(z / DZ_CLK));
      int  ix = int'($floor(x / PITCH)), iy = int'($floor(y / PITCH));
      if (k >= 0 && k < MAXCLK && ix >= 0 && ix < int'(NS) && iy >= 0 && iy < int'(NS)) begin
        e.amask[k][ix] = 1'b1;
        e.cmask[k][iy] = 1'b1;
        e.sx[k] += x; e.sy[k] += y; e.n[k]++;
        if (k > e.last_clk) e.last_clk = k;
      end
    end
  endfunction

  function automatic event_t new_event();
    event_t e;
    for (int k = 0; k < MAXCLK; k++) begin
      e.amask[k] = '0; e.cmask[k] = '0; e.sx[k] = 0.0; e.sy[k] = 0.0; e.n[k] = 0;
    end
    e.last_clk = -1;
    return e;
  endfunction

  // Trigger at one clock, strips of drift clock k one clock later plus k.
  task automatic run_event(event_t e);
    @(negedge clk);
    trigger = 1'b1; anode_disc = '0; cathode_disc = '0;
    for (int k = 0; k < MAXCLK; k++) begin
      @(negedge clk);
      trigger = 1'b0;
      anode_disc = e.amask[k]; cathode_disc = e.cmask[k];
      if (e.amask[k] != '0 && e.cmask[k] != '0) exp_hit_words++;
    end
    @(negedge clk);
    anode_disc = '0; cathode_disc = '0;
    repeat (10) @(negedge clk);
    events.push_back(e);
  endtask

  always @(posedge clk) begin
    run <= link_valid ? run + 1 : 0;
    if (run > longest_run) longest_run <= run;
  end

  initial begin
    event_t e;
    int ev, hits_seen, addr;
    real xr, yr, mx, my;
    int  pos_err_fail;
    pos_err_fail = 0;
    rst_n = 1'b0; anode_disc = '0; cathode_disc = '0; trigger = 1'b0;
    host_clear = 1'b0; host_rd_en = 1'b0; host_rd_addr = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // cosmic muons: full 80 mm drift, random straight lines
    for (int i = 0; i < 4; i++) begin
      e = new_event();
      add_segment(e, 10.0 + real'($urandom_range(800)) / 10.0, 10.0 + real'($urandom_range(800)) / 10.0, 79.9,
                     10.0 + real'($urandom_range(800)) / 10.0, 10.0 + real'($urandom_range(800)) / 10.0, 0.05);
      run_event(e);
    end
    // 85Kr beta electrons in a 12 mm gap: short, bent tracks
    for (int i = 0; i < 4; i++) begin
      real x0, y0;
      x0 = 20.0 + real'($urandom_range(600)) / 10.0;
      y0 = 20.0 + real'($urandom_range(600)) / 10.0;
      e = new_event();
      add_segment(e, x0, y0, 11.5, x0 + 6.0, y0 + 2.0, 6.0);
      add_segment(e, x0 + 6.0, y0 + 2.0, 6.0, x0 + 8.0, y0 - 5.0, 0.5);
      run_event(e);
    end
    // Compton electron, a few cm in the middle of the volume
    e = new_event();
    add_segment(e, 50.0, 40.0, 40.0, 55.0, 45.0, 35.0);
    add_segment(e, 55.0, 45.0, 35.0, 70.0, 50.0, 27.0);
    add_segment(e, 70.0, 50.0, 27.0, 66.0, 48.0, 18.0);
    run_event(e);

    // ---- read back and reconstruct
    checks++;
    if (int'(event_number) != events.size()) begin failures++; $display("FAIL: event number %0d", event_number); end
    checks++;
    if (int'(word_count) != events.size() + exp_hit_words) begin
      failures++; $display("FAIL: %0d words stored, expected %0d", word_count, events.size() + exp_hit_words);
    end
    ev = -1; hits_seen = 0;
    for (addr = 0; addr < int'(word_count); addr++) begin
      hit_word_t hw;
      @(negedge clk); host_rd_en = 1'b1; host_rd_addr = AW'(addr);
      @(negedge clk); host_rd_en = 1'b0;
      hw = host_rd_data;
      if (!hw.is_hit) begin
        ev++;
        checks++;
        if (int'(host_rd_data[30:0]) != ev) begin failures++; $display("FAIL: header %0d", host_rd_data[30:0]); end
      end else if (ev >= 0 && ev < events.size()) begin
        int k;
        k = int'(hw.clock_count);
        hits_seen++;
        checks++;
        if (events[ev].n[k] == 0) begin
          failures++; $display("FAIL: event %0d hit at clock %0d where no charge arrived", ev, k);
        end else begin
          mx = events[ev].sx[k] / events[ev].n[k];
          my = events[ev].sy[k] / events[ev].n[k];
          xr = (real'(hw.xpos) / 2.0 + 0.5) * PITCH;
          yr = (real'(hw.ypos) / 2.0 + 0.5) * PITCH;
          if ((xr - mx) > 0.5 || (mx - xr) > 0.5 || (yr - my) > 0.5 || (my - yr) > 0.5) begin
            failures++; pos_err_fail++;
            if (pos_err_fail < 10)
              $display("FAIL: event %0d clock %0d: reconstructed (%.2f, %.2f) mm, true mean (%.2f, %.2f) mm", ev, k, xr, yr, mx, my);
          end
        end
      end
    end
    checks++;
    if (hits_seen != exp_hit_words) begin failures++; $display("FAIL: %0d hit words read, expected %0d", hits_seen, exp_hit_words); end
    foreach (events[i]) begin
      checks++;
      if (events[i].last_clk >= MAXCLK || events[i].last_clk < 0) begin failures++; $display("FAIL: event %0d outside window", i); end
    end
    $display("events=%0d hit_words=%0d longest_clock_run=%0d muon_last_clock=%0d kr_last_clock=%0d",
             events.size(), hits_seen, longest_run, events[0].last_clk, events[4].last_clk);
    checks++;
    if (longest_run < 60) begin failures++; $display("FAIL: no sustained one-word-per-clock run"); end
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
