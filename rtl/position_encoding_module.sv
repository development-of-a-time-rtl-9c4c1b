// position_encoding_module (PEM): encodes the discriminator outputs of the
// micro pixel chamber into X, Y and drift-time words at 40 MHz.
//
// Inputs are the 256 anode strips (X coordinate) and 256 cathode strips
// (Y coordinate), 512 discriminator outputs in all, plus the external
// trigger. Data path:
//   anode_disc   -> hit_synchronizer -> strip_encoder (X) --+
//   cathode_disc -> hit_synchronizer -> strip_encoder (Y) --+-> event_builder -> word stream
//   trigger      -> hit_synchronizer (SYNC_STAGES + encoder latency) ---------+
// The trigger goes through a longer synchronizer so that it reaches the event
// builder in step with clusters sampled in the same clock.
//
// Timing: a strip pattern sampled at clock edge k appears in a hit word at
// word_valid after edge k + SYNC_STAGES + 2 (synchronizer, two encoder stages,
// output register). One word per clock at most; no back-pressure.
//
// The 512 inputs, the 40 MHz synchronous encoding and the outputs (X/Y
// position and width, clock counter, event number) follow the published
// module. The published module is spread over five FPGAs; how the logic is
// split among them is not given, so it is written here as one unit.
module position_encoding_module
  import tpc_pkg::*;
#(
  parameter int unsigned N_STRIPS    = 256,
  parameter int unsigned SYNC_STAGES = 2,
  parameter int unsigned WINDOW      = 128
) (
  input  logic                clk,          // 40 MHz
  input  logic                rst_n,
  input  logic [N_STRIPS-1:0] anode_disc,
  input  logic [N_STRIPS-1:0] cathode_disc,
  input  logic                trigger,
  output logic                word_valid,
  output logic [WORD_W-1:0]   word,
  output logic [EVT_W-1:0]    event_number,
  output logic                busy
);

  localparam int unsigned ENC_LATENCY = 2;

  logic [N_STRIPS-1:0] anode_s, cathode_s;
  logic                trigger_s;
  cluster_t            x_cluster, y_cluster;

  hit_synchronizer #(.WIDTH(N_STRIPS), .STAGES(SYNC_STAGES)) u_sync_anode (
    .clk, .rst_n, .async_in(anode_disc), .sync_out(anode_s));

  hit_synchronizer #(.WIDTH(N_STRIPS), .STAGES(SYNC_STAGES)) u_sync_cathode (
    .clk, .rst_n, .async_in(cathode_disc), .sync_out(cathode_s));

  hit_synchronizer #(.WIDTH(1), .STAGES(SYNC_STAGES + ENC_LATENCY)) u_sync_trigger (
    .clk, .rst_n, .async_in(trigger), .sync_out(trigger_s));

  strip_encoder #(.N_STRIPS(N_STRIPS)) u_enc_x (
    .clk, .rst_n, .hits(anode_s), .cluster(x_cluster));

  strip_encoder #(.N_STRIPS(N_STRIPS)) u_enc_y (
    .clk, .rst_n, .hits(cathode_s), .cluster(y_cluster));

  event_builder #(.WINDOW(WINDOW)) u_event (
    .clk, .rst_n, .trigger(trigger_s), .x_cluster, .y_cluster,
    .word_valid, .word, .event_number, .busy);

endmodule
