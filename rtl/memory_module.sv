// memory_module: stores the PEM word stream in SRAM for the host computer.
//
// The position encoding module sends 32-bit words over a 33-line link: 32
// data lines and its 40 MHz clock. This module runs on that forwarded clock.
// Every clock in which link_valid is high the word is written to the next
// SRAM address (word_count), so a run is stored in arrival order from
// address 0. When all DEPTH words are used the module is full: further words
// are not written and are counted in dropped_count. host_clear empties the
// memory (word_count and dropped_count to 0) for the next run.
//
// Host side: a simple synchronous read port (host_rd_en, host_rd_addr;
// host_rd_data valid with host_rd_valid one clock later) and the status
// outputs word_count, full and dropped_count. On the real board these sit
// behind a VME slave interface, which is not modelled here; the host is
// assumed to run on the same clock.
//
// Interface timing: writes take one clock, one word per clock, no stall.
// Asynchronous active-low reset clears the counters, not the SRAM.
//
// The 32-bit word, the 32 MByte SRAM and the forwarded clock follow the
// published memory module; sequential filling, the full/dropped handling and
// the host port are this design's choices.
module memory_module
  import tpc_pkg::*;
#(
  parameter int unsigned DEPTH = 32'd1 << 23,   // 32 MByte / 4 byte
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // link from the position encoding module
  input  logic              link_valid,
  input  logic [WORD_W-1:0] link_data,
  // host side
  input  logic              host_clear,
  input  logic              host_rd_en,
  input  logic [AW-1:0]     host_rd_addr,
  output logic [WORD_W-1:0] host_rd_data,
  output logic              host_rd_valid,
  output logic [AW:0]       word_count,
  output logic              full,
  output logic [31:0]       dropped_count
);

  logic wr_en;

  assign full  = (word_count == (AW+1)'(DEPTH));
  assign wr_en = link_valid && !full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      word_count    <= '0;
      dropped_count <= '0;
      host_rd_valid <= 1'b0;
    end else begin
      host_rd_valid <= host_rd_en;
      if (host_clear) begin
        word_count    <= '0;
        dropped_count <= '0;
      end else if (wr_en) begin
        word_count <= word_count + 1'b1;
      end else if (link_valid) begin
        dropped_count <= dropped_count + 32'd1;
      end
    end
  end

  sram_bank #(.DEPTH(DEPTH), .WIDTH(WORD_W)) u_sram (
    .clk     (clk),
    .wr_en   (wr_en && !host_clear),
    .wr_addr (word_count[AW-1:0]),
    .wr_data (link_data),
    .rd_en   (host_rd_en),
    .rd_addr (host_rd_addr),
    .rd_data (host_rd_data)
  );

  // The write pointer never passes the end of the SRAM.
  assert property (@(posedge clk) disable iff (!rst_n) word_count <= (AW+1)'(DEPTH));

endmodule
