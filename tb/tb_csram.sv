// tb_csram -- one C-SRAM computes a [BATCH x 12] x [12 x 128] product with
// 6-bit signed weights through its command interface (LOADW, BUILD, CLEAR,
// ACCUM, READ) and then converts the integer results to FP32 in the array's
// converter. Checks the integers of the readout and the FP32 bits of every
// column against a direct dot product.
module tb_csram;
  import sail_pkg::*;
  import sail_tb_pkg::*;
  localparam int COLS = 128, NBW = 2, BATCH = 2, R = 12, WB = 6, LUT_W = WMAX + NBW;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, rd_done, conv_start, conv_busy, conv_done;
  rcu_cmd_t cmd;
  logic [511:0] wblk;
  logic [ACC_W-1:0] acc_vec [COLS];
  logic [CONV_N-1:0] conv_in [COLS];
  logic [31:0] fp_vec [COLS];
  int wgt [R][COLS];
  int x [BATCH][R];
  int checks = 0, failures = 0;

  csram #(.COLS(COLS), .NBW(NBW), .BATCH(BATCH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic issue(input rcu_cmd_t c);
    cmd = c; cmd_valid = 1; @(negedge clk); cmd_valid = 0;
    while (!cmd_ready) @(negedge clk);
  endtask

  initial begin
    rcu_cmd_t c;
    cmd_valid = 0; cmd = '0; wblk = '0; conv_start = 0;
    for (int j = 0; j < COLS; j++) conv_in[j] = '0;
    for (int i = 0; i < R; i++) for (int j = 0; j < COLS; j++) wgt[i][j] = $urandom_range(0, 63) - 32;
    for (int b = 0; b < BATCH; b++) for (int i = 0; i < R; i++) x[b][i] = $urandom_range(0, 255);
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    c = '0; c.op = RCU_CLEAR; issue(c);
    for (int g = 0; g < R / NBW; g++) begin
      for (int n = 0; n < NBW; n++)
        for (int blk = 0; blk < COLS / 64; blk++) begin
          for (int e = 0; e < 64; e++) wblk[e*8 +: 8] = 8'(wgt[g*NBW+n][blk*64+e]);
          c = '0; c.op = RCU_LOADW; c.entry = 8'(1 << (NBW - 1 - n)); c.blk = 8'(blk);
          c.w_bits = 4'(WB); issue(c);
        end
      c = '0; c.op = RCU_BUILD; issue(c);
      for (int b = 0; b < BATCH; b++)
        for (int k = 0; k < ACT_BITS; k++) begin
          c = '0; c.op = RCU_ACCUM; c.batch = 8'(b); c.shift = 8'(k);
          for (int n = 0; n < NBW; n++) c.pattern[NBW-1-n] = 1'(x[b][g*NBW+n] >> k);
          issue(c);
        end
    end
    for (int b = 0; b < BATCH; b++) begin
      c = '0; c.op = RCU_READ; c.batch = 8'(b); issue(c);
      for (int j = 0; j < COLS; j++) conv_in[j] = CONV_N'(signed'(acc_vec[j]));
      conv_start = 1; @(negedge clk); conv_start = 0;
      while (!conv_done) @(negedge clk);
      for (int j = 0; j < COLS; j++) begin
        int ref_v;
        ref_v = 0;
        for (int i = 0; i < R; i++) ref_v += x[b][i] * wgt[i][j];
        checks += 2;
        if (sext(acc_vec[j], ACC_W) != ref_v) begin
          failures++; $display("FAIL int b %0d col %0d", b, j);
        end
        if (fp_vec[j] != to_fp32(longint'(ref_v))) begin
          failures++; $display("FAIL fp b %0d col %0d %h vs %h", b, j, fp_vec[j], to_fp32(ref_v));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
