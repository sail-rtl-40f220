// csram -- one compute-capable SRAM (C-SRAM) placed next to an LLC slice.
//
// Groups the bitline-computing array (bc_sram), the transposer, the
// reconfigurable control unit (rcu) and the column-parallel
// integer-to-float converter (int2fp). The DFM sends commands (cmd, with the
// 512-bit weight block on wblk for RCU_LOADW); the rcu expands each into
// array row operations and answers READ with one accumulator per column on
// acc_vec (rd_done pulse). The integer results, after any aggregation by the
// DFM, come back on conv_in and are converted to FP32 in place of the array
// (conv_start -> conv_done, fp_vec). Timing of each command: see rcu.
//
// The composition (array + transposer + control unit, and in-memory type
// conversion) follows the paper; the command interface is this design's.
module csram
  import sail_pkg::*;
#(
  parameter int unsigned ROWS  = CS_ROWS,
  parameter int unsigned COLS  = CS_COLS,
  parameter int unsigned NBW   = NBW_DEF,
  parameter int unsigned BATCH = BATCH_DEF,
  parameter int unsigned ACCW  = ACC_W,
  parameter int unsigned CONVN = CONV_N
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cmd_valid,
  output logic             cmd_ready,
  input  rcu_cmd_t         cmd,
  input  logic [BLK_W-1:0] wblk,
  output logic [ACCW-1:0]  acc_vec [COLS],
  output logic             rd_done,
  input  logic             conv_start,
  input  logic [CONVN-1:0] conv_in [COLS],
  output logic             conv_busy,
  output logic             conv_done,
  output logic [31:0]      fp_vec [COLS]
);
  localparam int unsigned LUT_W = WMAX + NBW;
  localparam int unsigned ELEMS = BLK_W / CONT_W;

  logic                     tp_start, tp_busy, tp_pv, tp_done;
  logic [3:0]               tp_wbits;
  logic [$clog2(LUT_W)-1:0] tp_idx;
  logic [ELEMS-1:0]         tp_plane;
  bc_op_e                   op;
  logic [$clog2(ROWS)-1:0]  ra, rb, wa;
  logic [COLS-1:0]          wdata, wmask, rdata;

  transposer #(.BLK_W(BLK_W), .CONT_W(CONT_W), .OUT_W(LUT_W)) u_tp (
    .clk, .rst_n, .start(tp_start), .blk(wblk), .w_bits(tp_wbits),
    .busy(tp_busy), .plane_valid(tp_pv), .plane_idx(tp_idx), .plane(tp_plane), .done(tp_done)
  );

  rcu #(.ROWS(ROWS), .COLS(COLS), .NBW(NBW), .BATCH(BATCH), .ACCW(ACCW),
        .LUT_W(LUT_W), .ELEMS(ELEMS)) u_rcu (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd,
    .tp_start, .tp_wbits, .tp_plane_valid(tp_pv), .tp_plane_idx(tp_idx),
    .tp_plane, .tp_done,
    .op, .ra, .rb, .wa, .wdata, .wmask, .rdata,
    .acc_vec, .rd_done
  );

  bc_sram #(.ROWS(ROWS), .COLS(COLS)) u_arr (
    .clk, .rst_n, .op, .ra, .rb, .wa, .wdata, .wmask, .rdata
  );

  int2fp #(.LANES(COLS), .N(CONVN)) u_conv (
    .clk, .rst_n, .start(conv_start), .a_in(conv_in),
    .busy(conv_busy), .done(conv_done), .fp(fp_vec)
  );
endmodule
