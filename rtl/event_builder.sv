// event_builder: turns triggers and per-clock X/Y clusters into the 32-bit
// word stream for the memory module.
//
// It keeps the event number (count of accepted triggers) and a clock counter
// that measures, in 25 ns clocks, the time since the trigger, i.e. the drift
// time of the ionisation electrons and so the third coordinate.
//
// Operation:
//   * A rising edge on `trigger` while no event is open starts an event: a
//     header word carrying the event number is sent in the next clock, the
//     event number is incremented and a window of WINDOW clocks opens.
//   * In each clock of the window (clock_count = 0 .. WINDOW-1) in which both
//     the anode side (X) and the cathode side (Y) have hit strips, one hit word
//     with both positions, both widths and clock_count is sent.
//   * A trigger edge while the window is open is ignored (dead time).
// At most one word leaves per clock, so the stream never needs back-pressure:
// 40 M words/s, above the 10^7 events/s rate the encoder is meant to reach.
//
// Interface: trigger, x_cluster and y_cluster must refer to the same sampling
// clock. word_valid/word are registered (one clock after the inputs).
// Asynchronous active-low reset clears the event number.
//
// The event number, clock counter and the X/Y position and width fields follow
// the published readout; the trigger window, the X-and-Y coincidence rule, the
// dead-time rule and the word layout (see tpc_pkg) are this design's choices.
module event_builder
  import tpc_pkg::*;
#(
  parameter int unsigned WINDOW = 128   // clocks per event, at most 2**CC_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                trigger,
  input  cluster_t            x_cluster,
  input  cluster_t            y_cluster,
  output logic                word_valid,
  output logic [WORD_W-1:0]   word,
  output logic [EVT_W-1:0]    event_number,  // events started so far
  output logic                busy           // window open
);

  logic            trig_q;
  logic [CC_W-1:0] clock_count;
  logic            trig_rise;
  hit_word_t       hit_w;
  header_word_t    hdr_w;

  assign trig_rise = trigger && !trig_q;

  always_comb begin
    hit_w.is_hit      = 1'b1;
    hit_w.xpos        = x_cluster.pos;
    hit_w.ypos        = y_cluster.pos;
    hit_w.xwidth      = sat_width(x_cluster.count);
    hit_w.ywidth      = sat_width(y_cluster.count);
    hit_w.clock_count = clock_count;
    hdr_w.is_hit       = 1'b0;
    hdr_w.event_number = event_number;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_q       <= 1'b0;
      busy         <= 1'b0;
      clock_count  <= '0;
      event_number <= '0;
      word_valid   <= 1'b0;
      word         <= '0;
    end else begin
      trig_q     <= trigger;
      word_valid <= 1'b0;
      if (!busy) begin
        if (trig_rise) begin
          word_valid   <= 1'b1;
          word         <= hdr_w;
          event_number <= event_number + EVT_W'(1);
          busy         <= 1'b1;
          clock_count  <= '0;
        end
      end else begin
        if (x_cluster.valid && y_cluster.valid) begin
          word_valid <= 1'b1;
          word       <= hit_w;
        end
        clock_count <= clock_count + CC_W'(1);
        if (clock_count == CC_W'(WINDOW - 1)) busy <= 1'b0;
      end
    end
  end

  initial assert (WINDOW >= 1 && WINDOW <= (1 << CC_W))
    else $error("event_builder: WINDOW must be 1..%0d", 1 << CC_W);

endmodule
