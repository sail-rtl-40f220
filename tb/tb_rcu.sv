// tb_rcu -- runs a small LUT-GEMV through the control unit with a real
// transposer and bitline array: 16 weight rows (8 groups of NBW=2) x 128
// output columns, 4 batch elements, random 4-bit signed weights and 8-bit
// unsigned activations. Each command's busy time is checked against the
// documented cycle count and every accumulator against a direct dot product.
module tb_rcu;
  import sail_pkg::*;
  import sail_tb_pkg::*;
  localparam int ROWS = 256, COLS = 128, NBW = 2, BATCH = 4, ACCW = 24, LUT_W = 10;
  localparam int ELEMS = 64, R = 16, WB = 4;

  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, tp_start, tp_pv, tp_done, tp_busy, rd_done;
  rcu_cmd_t cmd;
  logic [3:0] tp_wbits, tp_idx;
  logic [ELEMS-1:0] tp_plane;
  bc_op_e op;
  logic [7:0] ra, rb, wa;
  logic [COLS-1:0] wdata, wmask, rdata;
  logic [ACCW-1:0] acc_vec [COLS];
  logic [511:0] wblk;

  int wgt [R][COLS];
  int x [BATCH][R];
  int checks = 0, failures = 0;

  rcu #(.ROWS(ROWS), .COLS(COLS), .NBW(NBW), .BATCH(BATCH), .ACCW(ACCW), .LUT_W(LUT_W),
        .ELEMS(ELEMS)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .tp_start, .tp_wbits,
    .tp_plane_valid(tp_pv), .tp_plane_idx(tp_idx), .tp_plane, .tp_done,
    .op, .ra, .rb, .wa, .wdata, .wmask, .rdata, .acc_vec, .rd_done);
  transposer #(.BLK_W(512), .CONT_W(8), .OUT_W(LUT_W)) u_tp (
    .clk, .rst_n, .start(tp_start), .blk(wblk), .w_bits(tp_wbits), .busy(tp_busy),
    .plane_valid(tp_pv), .plane_idx(tp_idx), .plane(tp_plane), .done(tp_done));
  bc_sram #(.ROWS(ROWS), .COLS(COLS)) u_arr (.clk, .rst_n, .op, .ra, .rb, .wa, .wdata,
    .wmask, .rdata);

  always #5 clk = ~clk;

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // issue one command, return the number of cycles the unit was busy
  task automatic issue(input rcu_cmd_t c, output int busy_cyc);
    cmd = c; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    busy_cyc = 0;
    while (!cmd_ready) begin busy_cyc++; @(negedge clk); end
  endtask

  task automatic expect_cyc(input int got, input int exp, input string s);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s cycles %0d expected %0d", s, got, exp); end
  endtask

  initial begin
    rcu_cmd_t c;
    int bc;
    cmd_valid = 0; cmd = '0; wblk = '0;
    for (int i = 0; i < R; i++) for (int j = 0; j < COLS; j++) wgt[i][j] = $urandom_range(0, 15) - 8;
    for (int b = 0; b < BATCH; b++) for (int i = 0; i < R; i++) x[b][i] = $urandom_range(0, 255);
    x[0][0] = 0; x[0][1] = 0;   // a zero pattern in group 0
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);

    c = '0; c.op = RCU_CLEAR; issue(c, bc); expect_cyc(bc, BATCH * ACCW, "CLEAR");
    for (int g = 0; g < R / NBW; g++) begin
      for (int n = 0; n < NBW; n++)
        for (int blk = 0; blk < COLS / ELEMS; blk++) begin
          for (int e = 0; e < ELEMS; e++) wblk[e*8 +: 8] = 8'(wgt[g*NBW+n][blk*ELEMS+e]);
          c = '0; c.op = RCU_LOADW; c.entry = 8'(1 << (NBW - 1 - n)); c.blk = 8'(blk);
          c.w_bits = 4'(WB);
          issue(c, bc); expect_cyc(bc, LUT_W, "LOADW");
        end
      c = '0; c.op = RCU_BUILD; issue(c, bc); expect_cyc(bc, LUT_W + 1, "BUILD");
      for (int b = 0; b < BATCH; b++)
        for (int k = 0; k < ACT_BITS; k++) begin
          logic [7:0] p;
          p = '0;
          for (int n = 0; n < NBW; n++) p[NBW-1-n] = 1'(x[b][g*NBW+n] >> k);
          c = '0; c.op = RCU_ACCUM; c.batch = 8'(b); c.shift = 8'(k); c.pattern = p;
          issue(c, bc);
          expect_cyc(bc, (p == 0) ? 0 : ACCW - k + 1, "ACCUM");
        end
    end
    for (int b = 0; b < BATCH; b++) begin
      c = '0; c.op = RCU_READ; c.batch = 8'(b); issue(c, bc); expect_cyc(bc, ACCW + 1, "READ");
      checks++;
      if (!rd_done) begin failures++; $display("FAIL rd_done"); end
      for (int j = 0; j < COLS; j++) begin
        int ref_v;
        ref_v = 0;
        for (int i = 0; i < R; i++) ref_v += x[b][i] * wgt[i][j];
        checks++;
        if (sext(acc_vec[j], ACCW) != ref_v) begin
          failures++; $display("FAIL b %0d col %0d got %0d expected %0d", b, j,
                               sext(acc_vec[j], ACCW), ref_v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
