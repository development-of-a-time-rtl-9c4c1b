// tpc_tb_pkg: reference model and stimulus for the readout testbenches.
//
// pem_model predicts, from the strip patterns and trigger sampled in one
// clock, the word the position encoding module must emit for that clock. It
// is written from the word format and rules directly (count and index sum of
// the hit strips, centre of gravity 2*sum/count, width saturated at 7,
// header on an accepted trigger edge, hit word on X-and-Y coincidence inside
// the window) and shares no code with the design. It also counts how often
// each rule fired.
//
// track_gen produces detector-like patterns: a straight track whose anode (X)
// and cathode (Y) clusters move a little every clock while the electrons
// drift in, 1..9 strips wide, with clocks where only one side fires and
// occasional noise strips.
package tpc_tb_pkg;

  localparam int unsigned N = 256;

  class pem_model;
    int window;
    bit trig_q, busy;
    int cc, evn;
    int n_header, n_hit, n_single, n_close, n_retrig, n_sat;

    function new(int window_clocks);
      window = window_clocks;
      trig_q = 0; busy = 0; cc = 0; evn = 0;
      n_header = 0; n_hit = 0; n_single = 0; n_close = 0; n_retrig = 0; n_sat = 0;
    endfunction

    static function void encode(logic [N-1:0] p, output int cnt, output int pos);
      int sum = 0;
      cnt = 0;
      for (int i = 0; i < int'(N); i++) if (p[i]) begin cnt++; sum += i; end
      pos = (cnt == 0) ? 0 : (2 * sum) / cnt;
    endfunction

    // One sampled clock in, returns 1 and the word if a word is due.
    function bit step(bit trig, logic [N-1:0] anode, logic [N-1:0] cathode,
                      output logic [31:0] w);
      int xc, xp, yc, yp;
      bit rise = trig && !trig_q;
      bit v = 0;
      w = '0;
      encode(anode, xc, xp);
      encode(cathode, yc, yp);
      if (!busy) begin
        if (rise) begin
          v = 1; w = {1'b0, 31'(evn)};
          evn++; busy = 1; cc = 0; n_header++;
        end
      end else begin
        if (rise) n_retrig++;
        if (xc > 0 && yc > 0) begin
          v = 1;
          w = {1'b1, 9'(xp), 9'(yp), 3'(xc > 7 ? 7 : xc), 3'(yc > 7 ? 7 : yc), 7'(cc)};
          n_hit++;
          if (xc > 7 || yc > 7) n_sat++;
        end else if (xc > 0 || yc > 0) n_single++;
        if (cc == window - 1) begin busy = 0; n_close++; end
        cc++;
      end
      trig_q = trig;
      return v;
    endfunction
  endclass

  class track_gen;
    real x, y, dx, dy;
    int  len, t;
    function new();
      t = 0; len = 0;
    endfunction
    function void start(int clocks);
      x  = real'($urandom_range(20, 235));
      y  = real'($urandom_range(20, 235));
      dx = (real'($urandom_range(200)) - 100.0) / 100.0;
      dy = (real'($urandom_range(200)) - 100.0) / 100.0;
      len = clocks; t = 0;
    endfunction
    static function logic [N-1:0] cluster_at(real c, int w);
      logic [N-1:0] p = '0;
      int a = int'(c) - w / 2;
      for (int i = a; i < a + w; i++) if (i >= 0 && i < int'(N)) p[i] = 1'b1;
      return p;
    endfunction
    function void next(output logic [N-1:0] anode, output logic [N-1:0] cathode);
      anode = '0; cathode = '0;
      if (t < len) begin
        int r = int'($urandom_range(9));
        if (r != 0) anode   = cluster_at(x, 1 + int'($urandom_range(8)));
        if (r != 1) cathode = cluster_at(y, 1 + int'($urandom_range(8)));
        x += dx; y += dy;
        t++;
      end
      if ($urandom_range(20) == 0) anode[$urandom_range(N - 1)] = 1'b1;
      if ($urandom_range(20) == 0) cathode[$urandom_range(N - 1)] = 1'b1;
    endfunction
  endclass

endpackage
