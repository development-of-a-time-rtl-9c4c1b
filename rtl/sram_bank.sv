// sram_bank: the memory module's SRAM, DEPTH words of WIDTH bits.
//
// 32 MByte of SRAM organised as 32-bit words is 2**23 words, the default here.
// Written as a plain array with one synchronous write port and one
// synchronous read port (read data one clock after rd_en); the memory is not
// initialised, so only written addresses hold defined data.
//
// The size and the 32-bit organisation follow the published memory module;
// the separate read port (so the host can read while data are taken) and its
// one-clock latency are this design's choices.
module sram_bank #(
  parameter int unsigned DEPTH = 32'd1 << 23,
  parameter int unsigned WIDTH = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
