// tb_strip_encoder: self-checking test of strip_encoder at 256 strips.
//
// Applies one strip pattern per clock: empty patterns, contiguous groups of
// random position and length (1 .. 40 strips, including groups touching
// strip 0 and strip 255), sparse random patterns and all strips hit. For
// each pattern the expected result is worked out here (count of hit strips,
// centre of gravity 2*sum(i)/count in half-strip units; for a contiguous
// group also first+last) and compared with the encoder output two clock
// edges after the pattern is applied, which checks the pipeline latency and
// the one-result-per-clock rate.
module tb_strip_encoder;
  timeunit 1ns; timeprecision 100ps;
  import tpc_pkg::*;

  localparam int unsigned N = 256;
  localparam int unsigned LATENCY = 2;

  logic         clk = 1'b0;
  logic         rst_n;
  logic [N-1:0] hits;
  cluster_t     cluster;
  int checks = 0, failures = 0;

  strip_encoder dut (.*);

  always #12.5 clk = ~clk;

  typedef struct { logic [N-1:0] pat; int contig_first; int contig_last; } stim_t;
  stim_t q [$];

  function automatic stim_t make_stim(int kind);
    stim_t s;
    int a, len;
    s.pat = '0; s.contig_first = -1; s.contig_last = -1;
    case (kind)
      0: ;                                            // nothing hit
      1, 2, 3: begin                                  // contiguous group
        len = 1 + int'($urandom_range(39));
        a   = int'($urandom_range(N - len));
        if (kind == 2) a = 0;
        if (kind == 3) a = N - len;
        for (int i = a; i < a + len; i++) s.pat[i] = 1'b1;
        s.contig_first = a; s.contig_last = a + len - 1;
      end
      4: for (int i = 0; i < int'(N); i += 32) s.pat[i +: 32] = $urandom & $urandom & $urandom;
      default: s.pat = '1;
    endcase
    return s;
  endfunction

  task automatic check(stim_t s);
    int cnt = 0, sum = 0, exp_pos;
    for (int i = 0; i < int'(N); i++) if (s.pat[i]) begin cnt++; sum += i; end
    exp_pos = (cnt == 0) ? 0 : (2 * sum) / cnt;
    checks++;
    if (cluster.valid !== (cnt != 0) || int'(cluster.count) != cnt ||
        (cnt != 0 && int'(cluster.pos) != exp_pos)) begin
      failures++;
      $display("FAIL: got valid=%0d count=%0d pos=%0d, expected count=%0d pos=%0d",
               cluster.valid, cluster.count, cluster.pos, cnt, exp_pos);
    end
    if (s.contig_first >= 0) begin
      checks++;
      if (int'(cluster.pos) != s.contig_first + s.contig_last) begin
        failures++;
        $display("FAIL: contiguous %0d..%0d gave pos %0d", s.contig_first, s.contig_last, cluster.pos);
      end
    end
  endtask

  initial begin
    stim_t s;
    rst_n = 1'b0;
    hits  = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int c = 0; c < 600; c++) begin
      @(negedge clk);
      s = make_stim(c < 6 ? c : int'($urandom_range(5)));
      hits = s.pat;
      q.push_back(s);
      @(posedge clk); #1;
      if (q.size() >= LATENCY) check(q.pop_front());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200us;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
