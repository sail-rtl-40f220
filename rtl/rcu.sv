// rcu -- reconfigurable control unit of a C-SRAM.
//
// Turns one DFM command into the row-level operation sequence of the
// bitline-computing array. Every column is one output neuron; the array rows
// hold, per column, the 2^NBW - 1 non-zero entries of the lookup table
// (entry e = sum of the basis weights whose pattern bit is set, LUT_W bits
// each) followed by BATCH accumulators of ACCW bits:
//
//   rows [(e-1)*LUT_W +: LUT_W]          LUT entry e, e = 1 .. 2^NBW-1
//   rows [ACC_BASE + b*ACCW +: ACCW]   accumulator of batch element b
//
// Commands and their cycle counts (after the accepting cycle):
//   LOADW  entry, blk: transposer writes LUT_W bit-planes of a 512-bit weight
//          block into 64 columns of a single-weight entry   LUT_W + 1 cycles
//   BUILD  each multi-weight entry e = entry(e - low) + entry(low), in
//          ascending order, bit-serially                  (2^NBW-NBW-1)*(LUT_W+1)
//   CLEAR  zero all accumulator rows                        BATCH*ACCW
//   ACCUM  acc[b] += sext(LUT[p]) << k, bit-serially from bit k upward,
//          skipped when p == 0                              ACCW - k + 1
//   READ   acc[b] read out row by row into acc_vec          ACCW + 1
// cmd_ready is high only in IDLE. rd_done pulses when acc_vec holds a fresh
// readout.
//
// The LUT construction by in-array addition, the lookup-shift-add order of
// the LUT figure (pattern MSB selects W0), and online LUT building per group
// follow the paper. The row map, the accumulator width, and zero-pattern
// skipping are this design's choices.
module rcu
  import sail_pkg::*;
#(
  parameter int unsigned ROWS   = 256,
  parameter int unsigned COLS   = 512,
  parameter int unsigned NBW    = 2,
  parameter int unsigned BATCH  = 8,
  parameter int unsigned ACCW   = ACC_W,
  parameter int unsigned LUT_W  = 10,
  parameter int unsigned ELEMS  = 64
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cmd_valid,
  output logic                    cmd_ready,
  input  rcu_cmd_t                cmd,
  // transposer
  output logic                    tp_start,
  output logic [3:0]              tp_wbits,
  input  logic                    tp_plane_valid,
  input  logic [$clog2(LUT_W)-1:0] tp_plane_idx,
  input  logic [ELEMS-1:0]        tp_plane,
  input  logic                    tp_done,
  // array
  output bc_op_e                  op,
  output logic [$clog2(ROWS)-1:0] ra,
  output logic [$clog2(ROWS)-1:0] rb,
  output logic [$clog2(ROWS)-1:0] wa,
  output logic [COLS-1:0]         wdata,
  output logic [COLS-1:0]         wmask,
  input  logic [COLS-1:0]         rdata,
  // readout
  output logic [ACCW-1:0]        acc_vec [COLS],
  output logic                    rd_done
);
  localparam int unsigned NENT     = (1 << NBW) - 1;
  localparam int unsigned ACC_BASE = NENT * LUT_W;
  localparam int unsigned RW       = $clog2(ROWS);
  localparam int unsigned NBLK     = COLS / ELEMS;

  // The row map must fit the array.
  initial assert (ACC_BASE + BATCH * ACCW <= ROWS)
    else $fatal(1, "rcu: LUT and accumulators need more rows than the array has");

  typedef enum logic [3:0] {
    S_IDLE, S_LOADW, S_B_CLR, S_B_ADD, S_CLEAR, S_A_CLR, S_A_ADD, S_READ, S_READ_LAST
  } state_e;

  state_e      state;
  rcu_cmd_t    c;
  logic [7:0]  t;        // bit index
  logic [7:0]  e;        // entry being built

  function automatic logic [RW-1:0] lut_row(input logic [7:0] ent, input logic [7:0] bit_i);
    return RW'((int'(ent) - 1) * LUT_W + int'(bit_i));
  endfunction
  function automatic logic [RW-1:0] acc_row(input logic [7:0] b, input logic [7:0] bit_i);
    return RW'(ACC_BASE + int'(b) * ACCW + int'(bit_i));
  endfunction
  function automatic logic [7:0] low_bit(input logic [7:0] v);
    return v & (~v + 8'd1);
  endfunction
  // next entry (after cur) with at least two pattern bits set, or 0
  function automatic logic [7:0] next_multi(input logic [7:0] cur);
    for (int i = 1; i <= NENT; i++)
      if (i > int'(cur) && $countones(i) >= 2) return 8'(i);
    return 8'd0;
  endfunction

  assign cmd_ready = (state == S_IDLE);
  assign tp_wbits  = cmd.w_bits;   // sampled by the transposer with tp_start

  // sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; c <= '0; t <= '0; e <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          c <= cmd; t <= '0;
          unique case (cmd.op)
            RCU_LOADW: state <= S_LOADW;
            RCU_BUILD: begin
              e <= next_multi(8'd0);
              state <= (next_multi(8'd0) == 8'd0) ? S_IDLE : S_B_CLR;
            end
            RCU_CLEAR: state <= S_CLEAR;
            RCU_ACCUM: begin
              t <= cmd.shift;
              state <= (cmd.pattern == 8'd0) ? S_IDLE : S_A_CLR;
            end
            RCU_READ:  state <= S_READ;
            default:   state <= S_IDLE;
          endcase
        end
        S_LOADW: if (tp_done) state <= S_IDLE;
        S_B_CLR: begin t <= '0; state <= S_B_ADD; end
        S_B_ADD: begin
          t <= t + 8'd1;
          if (t == 8'(LUT_W - 1)) begin
            e <= next_multi(e);
            state <= (next_multi(e) == 8'd0) ? S_IDLE : S_B_CLR;
          end
        end
        S_CLEAR: begin
          t <= t + 8'd1;
          if (int'(t) == BATCH * ACCW - 1) state <= S_IDLE;
        end
        S_A_CLR: state <= S_A_ADD;
        S_A_ADD: begin
          t <= t + 8'd1;
          if (t == 8'(ACCW - 1)) state <= S_IDLE;
        end
        S_READ: begin
          t <= t + 8'd1;
          if (t == 8'(ACCW - 1)) state <= S_READ_LAST;
        end
        S_READ_LAST: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // array operation of the current cycle
  always_comb begin
    logic [7:0] lb, lsrc;
    op = BC_NOP; ra = '0; rb = '0; wa = '0; wdata = '0; wmask = '0;
    tp_start = (state == S_IDLE) && cmd_valid && (cmd.op == RCU_LOADW);
    lb   = low_bit(e);
    lsrc = (t - c.shift < 8'(LUT_W)) ? (t - c.shift) : 8'(LUT_W - 1);
    unique case (state)
      S_LOADW: if (tp_plane_valid) begin
        op = BC_WRITE;
        wa = lut_row(c.entry, 8'(tp_plane_idx));
        for (int k = 0; k < NBLK; k++) begin
          wdata[k*ELEMS +: ELEMS] = tp_plane;
          wmask[k*ELEMS +: ELEMS] = (k == int'(c.blk)) ? '1 : '0;
        end
      end
      S_B_CLR, S_A_CLR: op = BC_CCLR;
      S_B_ADD: begin
        op = BC_ADD;
        ra = lut_row(e ^ lb, t);
        rb = lut_row(lb, t);
        wa = lut_row(e, t);
      end
      S_CLEAR: begin
        op = BC_WRITE; wa = RW'(ACC_BASE + int'(t)); wmask = '1;
      end
      S_A_ADD: begin
        op = BC_ADD;
        ra = acc_row(c.batch, t);
        rb = lut_row(c.pattern, lsrc);
        wa = acc_row(c.batch, t);
      end
      S_READ: begin
        op = BC_READ; ra = acc_row(c.batch, t);
      end
      default: ;
    endcase
  end

  // readout capture: data of the read issued last cycle
  logic       rd_q;
  logic [7:0] rd_bit;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q <= 1'b0; rd_bit <= '0; rd_done <= 1'b0;
    end else begin
      rd_q    <= (state == S_READ);
      rd_bit  <= t;
      rd_done <= (state == S_READ_LAST);
    end
  end
  always_ff @(posedge clk) begin
    if (rd_q)
      for (int j = 0; j < COLS; j++) acc_vec[j][rd_bit[$clog2(ACCW)-1:0]] <= rdata[j];
  end
endmodule
