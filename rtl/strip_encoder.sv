// strip_encoder: encodes the hit strips of one electrode side into a position
// and a width, once per 40 MHz clock.
//
// The position is the centre of gravity of the hit strips. With strip indices
// i and hit flags h[i], N = sum h[i] and S = sum i*h[i]; the position is
// 2*S/N in half-strip units (truncated), which is exact (first+last) for a
// contiguous group of hit strips. The width is N, the number of hit strips.
//
// Pipeline (one result per clock, latency LATENCY = 2 clocks):
//   stage 1: population count N and index sum S of the hit vector
//   stage 2: division 2*S/N
// Interface: hits[N_STRIPS] (synchronous snapshot), cluster (valid, pos,
// count) two clocks later; valid is 0 when no strip was hit. Asynchronous
// active-low reset clears the pipeline.
//
// The centre-of-gravity method and the X/Y position-and-width outputs follow
// the published readout; using the hit count as the width, the half-strip
// units and the two-stage pipeline are this design's choices.
module strip_encoder
  import tpc_pkg::*;
#(
  parameter int unsigned N_STRIPS = 256
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N_STRIPS-1:0] hits,
  output cluster_t            cluster
);

  localparam int unsigned SUM_W   = 17;  // 2*sum(0..255) = 65280 < 2^17

  // ---- stage 1: count and index sum -------------------------------------
  logic [CNT_W-1:0] count_d, count_q;
  logic [SUM_W-1:0] sum_d, sum_q;

  always_comb begin
    count_d = '0;
    sum_d   = '0;
    for (int unsigned i = 0; i < N_STRIPS; i++) begin
      if (hits[i]) begin
        count_d = count_d + CNT_W'(1);
        sum_d   = sum_d + SUM_W'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count_q <= '0;
      sum_q   <= '0;
    end else begin
      count_q <= count_d;
      sum_q   <= sum_d;
    end
  end

  // ---- stage 2: centre of gravity ---------------------------------------
  logic [POS_W-1:0] pos_d;

  always_comb begin
    pos_d = '0;
    if (count_q != '0) pos_d = POS_W'((sum_q << 1) / SUM_W'(count_q));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cluster <= '0;
    end else begin
      cluster.valid <= (count_q != '0);
      cluster.pos   <= pos_d;
      cluster.count <= count_q;
    end
  end

  initial assert (N_STRIPS >= 1 && N_STRIPS <= N_STRIPS_MAX)
    else $error("strip_encoder: N_STRIPS must be 1..%0d", N_STRIPS_MAX);

endmodule
