// tb_lutmm_decoder -- checks every lutmm_1k field and the tile address
// arithmetic against an independent unpacking of random instruction words.
module tb_lutmm_decoder;
  import sail_pkg::*;
  logic [31:0] instr, rw, ri, rd;
  logic        is_l;
  logic [3:0]  wb;
  logic [31:0] ta, rs, ia, oa;
  logic [15:0] cf;
  int checks = 0, failures = 0;

  lutmm_decoder dut (.instr, .rw_val(rw), .ri_val(ri), .rd_val(rd), .is_lutmm(is_l),
    .w_bits(wb), .tile_addr(ta), .row_stride(rs), .col_first(cf), .in_addr(ia), .out_addr(oa));

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s instr=%h", what, instr); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    // the worked example of the paper: sc=3 -> width 8192, loc=5 -> columns 5120..6143
    instr = {5'd5, 2'd3, 5'd1, 5'd2, 3'd3, 5'd4, OPC_LUTMM};
    rw = 32'h1000_0000; ri = 32'h2000_0000; rd = 32'h3000_0000;
    #1;
    chk(is_l, "opcode");
    chk(cf == 16'd5120, "col_first example");
    chk(rs == 32'd8192, "stride example");
    chk(ta == 32'h1000_0000 + 32'd5120, "tile addr example");
    chk(wb == 4'd4, "ql 3 -> 4 bits");
    for (int n = 0; n < 500; n++) begin
      logic [4:0] loc; logic [1:0] sc; logic [2:0] ql;
      loc = 5'($urandom); sc = 2'($urandom); ql = 3'($urandom);
      instr = {loc, sc, 5'($urandom), 5'($urandom), ql, 5'($urandom),
               (n % 5 == 0) ? 7'b0110011 : OPC_LUTMM};
      rw = $urandom; ri = $urandom; rd = $urandom;
      #1;
      chk(is_l == (n % 5 != 0), "is_lutmm");
      chk(wb == 4'(ql) + 4'd1, "w_bits");
      chk(cf == 16'(loc) * 16'd1024, "col_first");
      chk(rs == 32'd1024 * (32'd1 << sc), "row_stride");
      chk(ta == rw + 32'(loc) * 32'd1024, "tile_addr");
      chk(ia == ri && oa == rd, "in/out addr");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
