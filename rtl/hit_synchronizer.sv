// hit_synchronizer: brings asynchronous discriminator outputs into the
// 40 MHz encoding clock domain.
//
// The discriminator outputs arrive as LVDS levels at any time; the encoder
// works on one snapshot of all strips per clock. Each input bit passes through
// STAGES flip-flops (a plain multi-stage synchronizer per bit). A strip counts
// as hit in every clock in which its discriminator output is high when sampled,
// so a long pulse shows up in several consecutive clocks.
//
// Interface: async_in[WIDTH] (any timing), sync_out[WIDTH] = async_in delayed
// by STAGES rising clock edges. rst_n is an asynchronous active-low reset that
// clears all stages.
//
// Sampling the strips synchronously with the 40 MHz clock follows the
// published readout; the number of stages and level (not edge) sampling are
// this design's choices.
module hit_synchronizer #(
  parameter int unsigned WIDTH  = 256,
  parameter int unsigned STAGES = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] async_in,
  output logic [WIDTH-1:0] sync_out
);

  logic [WIDTH-1:0] stage_q [STAGES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(STAGES); s++) stage_q[s] <= '0;
    end else begin
      stage_q[0] <= async_in;
      for (int s = 1; s < int'(STAGES); s++) stage_q[s] <= stage_q[s-1];
    end
  end

  assign sync_out = stage_q[STAGES-1];

  initial assert (STAGES >= 1) else $error("hit_synchronizer: STAGES must be at least 1");

endmodule
