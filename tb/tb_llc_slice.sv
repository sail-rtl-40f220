// tb_llc_slice -- writes random lines into both banks, reads them back with
// the one-cycle read latency, and reads one bank while the other is written.
module tb_llc_slice;
  localparam int LINES = 64;
  logic clk = 0, wr_en, wr_bank, rd_en, rd_bank;
  logic [5:0] wr_line, rd_line;
  logic [511:0] wr_data, rd_data;
  logic [511:0] model [2][LINES];
  int checks = 0, failures = 0;

  llc_slice #(.LINES(LINES), .W(512)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_bank = 0; rd_bank = 0; wr_line = 0; rd_line = 0; wr_data = 0;
    @(negedge clk);
    for (int bk = 0; bk < 2; bk++)
      for (int l = 0; l < LINES; l++) begin
        wr_en = 1; wr_bank = 1'(bk); wr_line = 6'(l);
        for (int w = 0; w < 16; w++) wr_data[w*32 +: 32] = $urandom;
        model[bk][l] = wr_data;
        @(negedge clk);
      end
    wr_en = 0;
    // read bank 0 while rewriting bank 1
    for (int l = 0; l < LINES; l++) begin
      rd_en = 1; rd_bank = 0; rd_line = 6'(l);
      wr_en = 1; wr_bank = 1; wr_line = 6'(LINES - 1 - l);
      for (int w = 0; w < 16; w++) wr_data[w*32 +: 32] = $urandom;
      model[1][LINES - 1 - l] = wr_data;
      @(negedge clk);
      checks++;
      if (rd_data !== model[0][l]) begin failures++; $display("FAIL bank0 line %0d", l); end
    end
    wr_en = 0;
    for (int l = 0; l < LINES; l++) begin
      rd_en = 1; rd_bank = 1; rd_line = 6'(l);
      @(negedge clk);
      checks++;
      if (rd_data !== model[1][l]) begin failures++; $display("FAIL bank1 line %0d", l); end
    end
    // rd_en low keeps the last data
    rd_en = 0; rd_line = 0; @(negedge clk);
    checks++;
    if (rd_data !== model[1][LINES-1]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
