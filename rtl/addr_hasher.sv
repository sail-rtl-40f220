// addr_hasher -- LLC slice selection that keeps 512-byte chunks whole.
//
// SAIL needs each weight row segment to sit in the slice next to the C-SRAM
// that uses it. The hasher keeps the low 9 address bits (a 512-byte chunk,
// eight 64-byte cache blocks) inside one slice and spreads consecutive chunks
// over the slices. Here the slice is taken from the bits just above the chunk
// offset, without further scrambling: for a 1024-byte weight row this puts
// columns 0..511 in slice 0 and 512..1023 in slice 1, and for a 512-byte row
// it alternates whole rows between the two slices. The line index inside the
// slice is the chunk number divided by the slice count, times eight, plus the
// block number inside the chunk.
//
// Combinational. Paper: 9 retained bits (CHUNK_W), 512-byte interleave.
// Own choice: no scrambling of the upper bits, power-of-two slice count.
// CHUNK_W is a parameter only so that scaled-down arrays (fewer columns per
// C-SRAM) keep one chunk = one C-SRAM's share of a weight row.
module addr_hasher #(
  parameter int unsigned N_SLICES = 2,
  parameter int unsigned LINE_W   = 13,   // line index width inside one slice half
  parameter int unsigned OFF_W    = 32,
  parameter int unsigned CHUNK_W  = 9     // retained low bits: 512-byte chunks
) (
  input  logic [OFF_W-1:0]                          addr,
  output logic [(N_SLICES > 1 ? $clog2(N_SLICES) : 1)-1:0] slice,
  output logic [LINE_W-1:0]                         line
);
  localparam int unsigned SB = (N_SLICES > 1) ? $clog2(N_SLICES) : 1;
  logic [OFF_W-1:0] chunk, blk;

  always_comb begin
    chunk = addr >> CHUNK_W;
    blk   = (addr & ((OFF_W'(1) << CHUNK_W) - 1)) >> 6;
    if (N_SLICES > 1) begin
      slice = SB'(chunk);
      line  = LINE_W'(((chunk >> SB) << (CHUNK_W - 6)) | blk);
    end else begin
      slice = '0;
      line  = LINE_W'((chunk << (CHUNK_W - 6)) | blk);
    end
  end
endmodule
