// lutmm_decoder -- decodes the single SAIL instruction, lutmm_1k.
//
// lutmm_1k computes one [1,1024]x[1024,1024] tile of a larger GEMV with
// lookup-table arithmetic in the C-SRAMs. The instruction word carries
// loc[31:27], sc[26:25], rw[24:20], ri[19:15], ql[14:12], rd[11:7] and
// opcode[6:0] (field positions as printed in the ISA figure). The full weight
// matrix is 1024 << sc wide, and the tile holds columns loc*1024 ..
// loc*1024+1023, so with one byte per weight the tile starts at
// rw_val + loc*1024 and consecutive tile rows are (1024 << sc) bytes apart.
// ql gives the weight precision, decoded here as bits = ql + 1 (own choice;
// the paper lists 2/3/4/5/6/8-bit support without an encoding).
//
// Purely combinational. rw_val/ri_val/rd_val are the register-file values of
// the named registers, read by the issuing core.
module lutmm_decoder
  import sail_pkg::*;
(
  input  logic [31:0]       instr,
  input  logic [ADDR_W-1:0] rw_val,
  input  logic [ADDR_W-1:0] ri_val,
  input  logic [ADDR_W-1:0] rd_val,
  output logic              is_lutmm,
  output logic [3:0]        w_bits,       // weight precision in bits
  output logic [ADDR_W-1:0] tile_addr,    // byte address of tile row 0, column 0
  output logic [ADDR_W-1:0] row_stride,   // bytes between tile rows (full matrix width)
  output logic [15:0]       col_first,    // first matrix column of the tile
  output logic [ADDR_W-1:0] in_addr,      // input vector base address
  output logic [ADDR_W-1:0] out_addr      // result vector base address
);
  lutmm_instr_t f;
  assign f = lutmm_instr_t'(instr);

  always_comb begin
    is_lutmm   = (f.opcode == OPC_LUTMM);
    w_bits     = ql_to_bits(f.ql);
    col_first  = 16'(f.loc) << 10;
    row_stride = ADDR_W'(VEC_LEN) << f.sc;
    tile_addr  = rw_val + ADDR_W'(col_first);
    in_addr    = ri_val;
    out_addr   = rd_val;
  end
endmodule
