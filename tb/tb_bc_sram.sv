// tb_bc_sram -- stores random numbers vertically (one per column), adds two
// of them with dual-wordline operations into a third row set, and reads the
// result back. Checks the sums, the n+1 cycle count of an n-bit addition,
// masked writes, and that untouched rows keep their contents.
module tb_bc_sram;
  import sail_pkg::*;
  localparam int ROWS = 64, COLS = 32, NB = 10;
  logic clk = 0, rst_n = 0;
  bc_op_e op;
  logic [5:0] ra, rb, wa;
  logic [COLS-1:0] wdata, wmask, rdata;
  logic [NB-1:0] x [COLS], y [COLS], got [COLS];
  int checks = 0, failures = 0, cyc = 0;

  bc_sram #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic do_op(input bc_op_e o, input int a, input int b, input int w);
    op = o; ra = 6'(a); rb = 6'(b); wa = 6'(w); @(negedge clk); op = BC_NOP;
  endtask

  initial begin
    int c0;
    op = BC_NOP; ra = 0; rb = 0; wa = 0; wdata = 0; wmask = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int rep = 0; rep < 20; rep++) begin
      for (int j = 0; j < COLS; j++) begin
        x[j] = NB'($urandom); y[j] = NB'($urandom);
        if (x[j][NB-1] && rep % 2 == 0) x[j][NB-1] = 1'b0;
      end
      // x in rows 0.., y in rows 16.., full-row writes
      for (int t = 0; t < NB; t++) begin
        for (int j = 0; j < COLS; j++) wdata[j] = x[j][t];
        wmask = '1; do_op(BC_WRITE, 0, 0, t);
        for (int j = 0; j < COLS; j++) wdata[j] = y[j][t];
        do_op(BC_WRITE, 0, 0, 16 + t);
      end
      // sum into rows 32..: one CCLR + NB adds = NB+1 cycles
      c0 = cyc;
      do_op(BC_CCLR, 0, 0, 0);
      for (int t = 0; t < NB; t++) do_op(BC_ADD, t, 16 + t, 32 + t);
      checks++;
      if (cyc - c0 != NB + 1) begin failures++; $display("FAIL add took %0d", cyc - c0); end
      for (int t = 0; t < NB; t++) begin
        do_op(BC_READ, 32 + t, 0, 0);
        for (int j = 0; j < COLS; j++) got[j][t] = rdata[j];
      end
      for (int j = 0; j < COLS; j++) begin
        checks++;
        if (got[j] != x[j] + y[j]) begin
          failures++; $display("FAIL col %0d: %0d + %0d -> %0d", j, x[j], y[j], got[j]);
        end
      end
      // x rows untouched
      do_op(BC_READ, 3, 0, 0);
      checks++;
      for (int j = 0; j < COLS; j++) if (rdata[j] != x[j][3]) begin failures++; break; end
    end
    // masked write changes only the masked columns
    wmask = '1; wdata = '0; do_op(BC_WRITE, 0, 0, 50);
    wmask = 32'h0000_FF00; wdata = '1; do_op(BC_WRITE, 0, 0, 50);
    do_op(BC_READ, 50, 0, 0);
    checks++;
    if (rdata != 32'h0000_FF00) begin failures++; $display("FAIL mask %h", rdata); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
