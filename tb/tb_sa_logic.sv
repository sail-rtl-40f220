// tb_sa_logic -- drives the SA stage with the AND/NOR values two cells would
// produce and checks bit-serial addition of random 12-bit numbers in all 32
// columns, one carry-clear cycle plus 12 sum cycles.
module tb_sa_logic;
  localparam int COLS = 32, NB = 12;
  logic clk = 0, rst_n = 0, c_clr, c_en;
  logic [COLS-1:0] bl_and, blb_nor, xor_o, sum, carry;
  logic [NB-1:0] a [COLS], b [COLS], s [COLS];
  int checks = 0, failures = 0;

  sa_logic #(.COLS(COLS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    c_clr = 0; c_en = 0; bl_and = 0; blb_nor = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 50; rep++) begin
      for (int j = 0; j < COLS; j++) begin a[j] = NB'($urandom); b[j] = NB'($urandom); end
      c_clr = 1; c_en = 0; @(negedge clk); c_clr = 0;
      for (int t = 0; t < NB; t++) begin
        for (int j = 0; j < COLS; j++) begin
          bl_and[j]  = a[j][t] & b[j][t];
          blb_nor[j] = ~(a[j][t] | b[j][t]);
        end
        c_en = 1; #1;
        for (int j = 0; j < COLS; j++) s[j][t] = sum[j];
        @(negedge clk);
      end
      c_en = 0;
      for (int j = 0; j < COLS; j++) begin
        checks++;
        if (s[j] != a[j] + b[j]) begin
          failures++; $display("FAIL col %0d %0d+%0d got %0d", j, a[j], b[j], s[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
