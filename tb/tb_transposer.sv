// tb_transposer -- random 512-bit blocks at every precision from 2 to 8 bits:
// checks that plane t holds bit t of each sign-extended weight, that exactly
// OUT_W planes come out on consecutive cycles, and that done marks the last.
module tb_transposer;
  import sail_tb_pkg::*;
  localparam int OUT_W = 10, ELEMS = 64;
  logic clk = 0, rst_n = 0, start, busy, pv, done;
  logic [511:0] blk;
  logic [3:0] w_bits;
  logic [3:0] idx;
  logic [ELEMS-1:0] plane;
  int checks = 0, failures = 0;

  transposer #(.BLK_W(512), .CONT_W(8), .OUT_W(OUT_W)) dut (
    .clk, .rst_n, .start, .blk, .w_bits, .busy, .plane_valid(pv), .plane_idx(idx),
    .plane, .done);
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    start = 0; blk = 0; w_bits = 4;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int rep = 0; rep < 70; rep++) begin
      int wb, n;
      logic [511:0] ref_blk;
      wb = 2 + rep % 7;
      for (int w = 0; w < 16; w++) blk[w*32 +: 32] = $urandom;
      ref_blk = blk;
      w_bits = 4'(wb); start = 1; @(negedge clk); start = 0;
      blk = '0;   // must have been latched
      n = 0;
      while (pv) begin
        checks++;
        if (int'(idx) != n) begin failures++; $display("FAIL idx"); end
        for (int e = 0; e < ELEMS; e++) begin
          int v;
          v = sext(int'(ref_blk[e*8 +: 8]), wb);
          if (plane[e] != 1'(v >>> n)) begin
            failures++; $display("FAIL rep %0d e %0d t %0d", rep, e, n); break;
          end
        end
        if (done != (n == OUT_W - 1)) begin failures++; $display("FAIL done"); end
        n++;
        @(negedge clk);
      end
      checks++;
      if (n != OUT_W) begin failures++; $display("FAIL planes=%0d", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
