// tb_addr_hasher -- checks the 512-byte interleave: the low 9 bits never
// change the slice, consecutive chunks alternate, and each slice's lines are
// dense. Random addresses plus a full sweep of a 1024x1024 byte tile.
module tb_addr_hasher;
  logic [31:0] addr;
  logic        slice;
  logic [12:0] line;
  int checks = 0, failures = 0;
  int cnt [2];

  addr_hasher #(.N_SLICES(2), .LINE_W(13), .OFF_W(32)) dut (.addr, .slice, .line);

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      addr = $urandom & 32'h000F_FFFF; #1;
      checks++;
      if (slice != addr[9] || line != 13'(((addr >> 10) << 3) | ((addr >> 6) & 7))) begin
        failures++; $display("FAIL addr=%h slice=%0d line=%0d", addr, slice, line);
      end
    end
    // row-mode tile: row r, column half h -> slice h, line r*8 + block
    cnt[0] = 0; cnt[1] = 0;
    for (int r = 0; r < 1024; r++)
      for (int blk = 0; blk < 16; blk++) begin
        addr = 32'(r * 1024 + blk * 64); #1;
        checks++;
        if (slice != 1'(blk / 8) || line != 13'(r * 8 + blk % 8)) begin
          failures++; $display("FAIL tile r=%0d blk=%0d", r, blk);
        end
        cnt[slice]++;
      end
    checks++;
    if (cnt[0] != cnt[1]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
