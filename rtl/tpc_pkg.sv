// tpc_pkg: constants and word formats shared by the micro-TPC readout logic.
//
// The readout samples the discriminator outputs of 256 anode strips (X) and
// 256 cathode strips (Y) with a 40 MHz clock and sends 32-bit words to a
// memory module. The strip counts, the 40 MHz clock and the 32-bit word width
// follow the readout described for the detector; the field layout of the
// words below is this design's own choice, since no bit layout is published.
//
// Word formats (bit 31 tells them apart):
//   header word : {1'b0, event_number[30:0]}         written once per trigger
//   hit word    : {1'b1, xpos[8:0], ypos[8:0],
//                  xwidth[2:0], ywidth[2:0], clock_count[6:0]}
// Positions are in half-strip units (0 .. 2*(N-1)), i.e. 0.2 mm steps for a
// 0.4 mm strip pitch. Widths are the number of hit strips, saturated at 7.
// clock_count is the number of 25 ns clocks since the trigger (drift time).
package tpc_pkg;

  localparam int unsigned N_STRIPS_MAX = 256;   // strips per electrode side
  localparam int unsigned WORD_W       = 32;    // memory module word width
  localparam int unsigned POS_W        = 9;     // half-strip position field
  localparam int unsigned CNT_W        = 9;     // number of hit strips, 0..256
  localparam int unsigned WID_W        = 3;     // width field in a hit word
  localparam int unsigned CC_W         = 7;     // clock counter field
  localparam int unsigned EVT_W        = 31;    // event number field

  // Result of encoding one electrode side for one clock.
  typedef struct packed {
    logic             valid;   // at least one strip was hit
    logic [POS_W-1:0] pos;     // centre of gravity, half-strip units
    logic [CNT_W-1:0] count;   // number of hit strips
  } cluster_t;

  typedef struct packed {
    logic             is_hit;  // 1
    logic [POS_W-1:0] xpos;
    logic [POS_W-1:0] ypos;
    logic [WID_W-1:0] xwidth;
    logic [WID_W-1:0] ywidth;
    logic [CC_W-1:0]  clock_count;
  } hit_word_t;

  typedef struct packed {
    logic             is_hit;  // 0
    logic [EVT_W-1:0] event_number;
  } header_word_t;

  // Width field: number of hit strips, saturated to the field size.
  function automatic logic [WID_W-1:0] sat_width(input logic [CNT_W-1:0] count);
    return (count > CNT_W'((1 << WID_W) - 1)) ? WID_W'((1 << WID_W) - 1) : count[WID_W-1:0];
  endfunction

endpackage
