// micro_tpc_readout: digital readout of the micro-TPC, from discriminator
// outputs to words stored in the memory module.
//
// The position encoding module (PEM) samples the 256 anode and 256 cathode
// discriminator outputs at 40 MHz and sends header and hit words over a
// 32-bit link, together with its clock, to the memory module, which stores
// them in SRAM for the host. Both run here on the one 40 MHz clock, which
// stands for the PEM clock forwarded on the link's 33rd line.
//
// Ports: discriminator inputs and trigger on the detector side; the host read
// port and status of the memory module; the link itself (link_valid,
// link_data) and the PEM's event number are brought out for observation.
// The analog front end, flash ADC, VME interface and CPU are outside.
//
// The split into PEM and memory module and their connection follow the
// published block diagram; the word layout and the host port are this
// design's choices (see tpc_pkg and memory_module).
module micro_tpc_readout
  import tpc_pkg::*;
#(
  parameter int unsigned N_STRIPS    = 256,
  parameter int unsigned SYNC_STAGES = 2,
  parameter int unsigned WINDOW      = 128,
  parameter int unsigned MEM_DEPTH   = 32'd1 << 23,
  localparam int unsigned AW         = $clog2(MEM_DEPTH)
) (
  input  logic                clk,
  input  logic                rst_n,
  // detector side
  input  logic [N_STRIPS-1:0] anode_disc,
  input  logic [N_STRIPS-1:0] cathode_disc,
  input  logic                trigger,
  // link, for observation
  output logic                link_valid,
  output logic [WORD_W-1:0]   link_data,
  output logic [EVT_W-1:0]    event_number,
  output logic                busy,
  // host side of the memory module
  input  logic                host_clear,
  input  logic                host_rd_en,
  input  logic [AW-1:0]       host_rd_addr,
  output logic [WORD_W-1:0]   host_rd_data,
  output logic                host_rd_valid,
  output logic [AW:0]         word_count,
  output logic                mem_full,
  output logic [31:0]         dropped_count
);

  position_encoding_module #(
    .N_STRIPS(N_STRIPS), .SYNC_STAGES(SYNC_STAGES), .WINDOW(WINDOW)
  ) u_pem (
    .clk, .rst_n, .anode_disc, .cathode_disc, .trigger,
    .word_valid(link_valid), .word(link_data), .event_number, .busy);

  memory_module #(.DEPTH(MEM_DEPTH)) u_mm (
    .clk, .rst_n, .link_valid, .link_data,
    .host_clear, .host_rd_en, .host_rd_addr, .host_rd_data, .host_rd_valid,
    .word_count, .full(mem_full), .dropped_count);

endmodule
