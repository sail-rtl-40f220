// tb_prt -- fills the 32-entry table, checks hits return stored data and
// misses for absent keys, round-robin replacement of the oldest entry on the
// 33rd insert, overwrite on a repeated key, and flush.
module tb_prt;
  logic clk = 0, rst_n = 0, flush, insert, hit;
  logic [31:0] key;
  logic [15:0] hit_data, ins_data;
  int checks = 0, failures = 0;

  prt #(.ENTRIES(32), .KEY_W(32), .DATA_W(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input logic ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s key=%h", s, key); end
  endtask

  initial begin
    flush = 0; insert = 0; key = 0; ins_data = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 32; n++) begin
      key = 32'hA000_0000 + 32'(n * 7); #1;
      chk(!hit, "miss before insert");
      insert = 1; ins_data = 16'(n * 3 + 1); @(negedge clk); insert = 0;
    end
    for (int n = 0; n < 32; n++) begin
      key = 32'hA000_0000 + 32'(n * 7); #1;
      chk(hit && hit_data == 16'(n * 3 + 1), "hit data");
    end
    key = 32'h1234_5678; #1; chk(!hit, "absent");
    insert = 1; ins_data = 16'hBEEF; @(negedge clk); insert = 0;   // evicts entry 0
    #1; chk(hit && hit_data == 16'hBEEF, "new entry");
    key = 32'hA000_0000; #1; chk(!hit, "oldest evicted");
    key = 32'hA000_0007; #1; chk(hit, "second kept");
    insert = 1; ins_data = 16'h0042; @(negedge clk); insert = 0;    // overwrite in place
    #1; chk(hit && hit_data == 16'h0042, "overwrite");
    key = 32'hA000_000E; #1; chk(hit, "third kept after overwrite");
    flush = 1; @(negedge clk); flush = 0;
    for (int n = 1; n < 32; n++) begin
      key = 32'hA000_0000 + 32'(n * 7); #1; chk(!hit, "flushed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
