// llc_slice -- data array of one last-level-cache slice, used as a ping-pong
// weight buffer.
//
// SAIL splits the LLC into two halves: while one half is written with the
// next weight tile from DRAM, the other half feeds the C-SRAM next to it, and
// the roles swap after every tile. This module is that storage: two banks of
// LINES 512-bit lines, one write port for the fill side and one read port
// (the 512-bit slice-to-C-SRAM link of the architecture figure) for the
// compute side. Both ports carry their own bank bit, so a fill of one bank
// and a read of the other run in the same cycle. Reads return data one cycle
// after rd_en. Tags, coherence and replacement of a real cache are not
// modelled: the slice is addressed directly by line.
//
// Default size: 2 x 8192 lines x 64 B = 1 MB, the slice size of the
// evaluated 32 MB / 32-slice LLC; one bank holds half of a 1024x1024 tile at
// one byte per weight.
module llc_slice #(
  parameter int unsigned LINES = 8192,      // lines per bank
  parameter int unsigned W     = 512
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic                     wr_bank,
  input  logic [$clog2(LINES)-1:0] wr_line,
  input  logic [W-1:0]             wr_data,
  input  logic                     rd_en,
  input  logic                     rd_bank,
  input  logic [$clog2(LINES)-1:0] rd_line,
  output logic [W-1:0]             rd_data
);
  logic [W-1:0] mem [2*LINES];

  always_ff @(posedge clk) begin
    if (wr_en) mem[{wr_bank, wr_line}] <= wr_data;
    if (rd_en) rd_data <= mem[{rd_bank, rd_line}];
  end
endmodule
