// bc_sram -- bitline-computing SRAM array of one C-SRAM.
//
// A ROWS x COLS array of bit cells with two row decoders, so two wordlines
// (ra and rb) can be raised in the same cycle. The columns' sense amplifiers
// then see AND(row ra, row rb) on BL and NOR on BLB, and the sa_logic stage
// turns them into one bit of a column-parallel addition. Every column is an
// independent bit-serial lane: a number is stored vertically, one bit per
// row.
//
// One operation per cycle (op):
//   BC_WRITE  row wa <= wdata where wmask is 1 (write drivers, masked)
//   BC_READ   rdata <= row ra, valid on the cycle after the operation
//   BC_ADD    row wa <= row ra + row rb + C (one bit per column), C updated
//   BC_CCLR   clear the carry latches
// In BC_ADD the sum is written back in the same cycle that both rows are
// sensed. Dual decoders and the AND/NOR sensing follow the paper (after
// Neural Cache); the single-cycle sense-and-write-back is this design's
// timing abstraction. The array contents are not reset.
module bc_sram
  import sail_pkg::*;
#(
  parameter int unsigned ROWS = 256,
  parameter int unsigned COLS = 512
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  bc_op_e                  op,
  input  logic [$clog2(ROWS)-1:0] ra,     // decoder A
  input  logic [$clog2(ROWS)-1:0] rb,     // decoder B
  input  logic [$clog2(ROWS)-1:0] wa,     // write-back row
  input  logic [COLS-1:0]         wdata,
  input  logic [COLS-1:0]         wmask,
  output logic [COLS-1:0]         rdata
);
  logic [COLS-1:0] mem [ROWS];
  logic [COLS-1:0] row_a, row_b, bl_and, blb_nor, xor_v, sum_v, carry_v;

  always_comb begin
    row_a   = mem[ra];
    row_b   = (op == BC_ADD) ? mem[rb] : mem[ra];
    bl_and  = row_a & row_b;
    blb_nor = ~(row_a | row_b);
  end

  sa_logic #(.COLS(COLS)) u_sa (
    .clk, .rst_n,
    .bl_and, .blb_nor,
    .c_clr (op == BC_CCLR),
    .c_en  (op == BC_ADD),
    .xor_o (xor_v),
    .sum   (sum_v),
    .carry (carry_v)
  );

  always_ff @(posedge clk) begin
    unique case (op)
      BC_WRITE: mem[wa] <= (mem[wa] & ~wmask) | (wdata & wmask);
      BC_ADD:   mem[wa] <= sum_v;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)            rdata <= '0;
    else if (op == BC_READ) rdata <= bl_and;
  end
endmodule
