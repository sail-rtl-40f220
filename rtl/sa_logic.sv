// sa_logic -- the modified sense-amplifier stage of every bitline column.
//
// With two wordlines raised at once, the bitline BL discharges unless both
// cells hold 1, so its single-ended SA senses AND(a,b); the complement line
// BLB senses NOR(a,b). A small logic stage per column turns these two into a
// bit-serial full adder: XOR = NOR(AND, NOR), sum = XOR ^ C, and the carry
// latch C takes AND | (XOR & C) when C_EN is set. An n-bit addition is thus
// one carry-clear cycle plus n sum cycles (n+1 cycles, as the paper states).
//
// Inputs bl_and/blb_nor are the sensed values of the current cycle; sum is
// combinational, carry is the latch. c_clr has priority over c_en.
// The AND/NOR sensing and the C latch with C_EN follow the SA figure; the
// exact gate network is this design's own (the figure's gates are not
// labelled).
module sa_logic #(
  parameter int unsigned COLS = 512
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [COLS-1:0] bl_and,
  input  logic [COLS-1:0] blb_nor,
  input  logic            c_clr,
  input  logic            c_en,
  output logic [COLS-1:0] xor_o,
  output logic [COLS-1:0] sum,
  output logic [COLS-1:0] carry
);
  always_comb begin
    xor_o = ~(bl_and | blb_nor);
    sum   = xor_o ^ carry;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     carry <= '0;
    else if (c_clr) carry <= '0;
    else if (c_en)  carry <= bl_and | (xor_o & carry);
  end
endmodule
