// transposer -- horizontal-to-vertical layout conversion for bit-serial
// computing.
//
// A 512-bit cache block arrives with ELEMS weights side by side, each in a
// CONT_W-bit container whose low w_bits bits hold a two's-complement weight.
// The bitline array wants each weight standing in one column, one bit per
// row. After start the transposer emits OUT_W bit-planes on consecutive
// cycles: plane t holds bit t of every weight, sign-extended from w_bits to
// OUT_W bits, so the array can store entries that later grow by addition
// without overflow. plane_valid is high for OUT_W cycles, plane_idx counts
// 0..OUT_W-1, done pulses with the last plane. start is ignored while busy.
//
// The horizontal-to-vertical function and the 512-bit input follow the
// paper; the byte container, sign extension, and the precision taken from
// the instruction's ql field are this design's choices (the paper only says
// the transpose adapts to the quantization level).
module transposer #(
  parameter int unsigned BLK_W  = 512,
  parameter int unsigned CONT_W = 8,
  parameter int unsigned OUT_W  = 10,
  parameter int unsigned ELEMS  = BLK_W / CONT_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [BLK_W-1:0]          blk,
  input  logic [3:0]                w_bits,
  output logic                      busy,
  output logic                      plane_valid,
  output logic [$clog2(OUT_W)-1:0]  plane_idx,
  output logic [ELEMS-1:0]          plane,
  output logic                      done
);
  logic [BLK_W-1:0]          blk_q;
  logic [3:0]                bits_q;
  logic [$clog2(OUT_W)-1:0]  t;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; t <= '0; blk_q <= '0; bits_q <= 4'd8;
    end else if (!busy) begin
      if (start) begin
        busy <= 1'b1; t <= '0; blk_q <= blk; bits_q <= w_bits;
      end
    end else begin
      if (t == $clog2(OUT_W)'(OUT_W - 1)) busy <= 1'b0;
      t <= t + 1'b1;
    end
  end

  // Bit t of a sign-extended weight: above the top weight bit, repeat it.
  always_comb begin
    logic [3:0] sel;
    sel = (4'(t) < bits_q) ? 4'(t) : bits_q - 4'd1;
    for (int e = 0; e < ELEMS; e++)
      plane[e] = blk_q[e*CONT_W + int'(sel)];
    plane_valid = busy;
    plane_idx   = t;
    done        = busy && (t == $clog2(OUT_W)'(OUT_W - 1));
  end
endmodule
