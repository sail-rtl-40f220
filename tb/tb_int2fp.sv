// tb_int2fp -- converts random signed integers of up to 25 bits (magnitudes
// below 2^24, so FP32 is exact) in 16 lanes, plus edge values, and compares
// with the IEEE-754 bits of the same value taken from a real conversion.
// Also checks that done comes 3N+2 cycles after start.
module tb_int2fp;
  import sail_tb_pkg::*;
  localparam int LANES = 16, N = 25;
  logic clk = 0, rst_n = 0, start, busy, done;
  logic [N-1:0] a_in [LANES];
  logic [31:0] fp [LANES];
  longint v [LANES];
  int checks = 0, failures = 0, cyc = 0;

  int2fp #(.LANES(LANES), .N(N)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    start = 0;
    for (int l = 0; l < LANES; l++) a_in[l] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int rep = 0; rep < 60; rep++) begin
      int c0;
      for (int l = 0; l < LANES; l++) begin
        int sh;
        sh = $urandom_range(0, 23);
        v[l] = longint'($urandom_range(0, 32'hFF_FFFF)) >> sh;
        if ($urandom_range(0, 1) == 1) v[l] = -v[l];
        if (rep == 0) v[l] = (l == 0) ? 0 : (l == 1) ? 1 : (l == 2) ? -1 :
                             (l == 3) ? 24'hFF_FFFF : (l == 4) ? -24'shFF_FFFF :
                             (l == 5) ? 2 : (l == 6) ? 64'(1 << 23) : longint'(l);
        a_in[l] = N'(v[l]);
      end
      start = 1; c0 = cyc; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      checks++;
      if (cyc - c0 != 3 * N + 2) begin failures++; $display("FAIL latency %0d", cyc - c0); end
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (fp[l] != to_fp32(v[l])) begin
          failures++; $display("FAIL %0d -> %h expected %h", v[l], fp[l], to_fp32(v[l]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
