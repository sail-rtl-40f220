// sail_top -- the SAIL near-cache LUT-GEMV fabric of the last-level cache.
//
// N_THREADS independent lutmm_1k engines. Each has one data feeding module
// (dfm), two C-SRAMs and the two LLC slices they sit next to; a slice
// reaches its C-SRAM over a 512-bit link, so a whole cache block moves per
// cycle. The default, 16 threads = 32 C-SRAMs next to 32 x 1 MB slices,
// is the evaluated 32 MB LLC with 16 threads; its C-SRAM total is
// 32 x 256 x 512 bits = 512 KB.
//
// Everything outside the LLC stays outside this module and appears as ports
// of each thread t:
//   instr_*/rw_val/ri_val/rd_val/kv_mode   lutmm_1k issue from the core
//   in_req_* / in_rsp_*                    input-vector blocks from the data
//                                          cache (64 activations per block)
//   fill_*                                 weight blocks arriving from DRAM;
//                                          fill_addr is the byte offset inside
//                                          the tile (row * row_bytes + column),
//                                          the address hasher chooses slice
//                                          and line; fill_done pulses once
//                                          the tile is complete
//   tile_addr/tile_stride                  what the fill side must fetch
//   out_*                                  FP32 results for the core's
//                                          vector engine (dequantization)
// The NoC, the cores, their caches and DRAM are not part of this RTL.
module sail_top
  import sail_pkg::*;
#(
  parameter int unsigned N_THREADS = 16,
  parameter int unsigned COLS      = CS_COLS,
  parameter int unsigned ROWS      = CS_ROWS,
  parameter int unsigned NBW       = NBW_DEF,
  parameter int unsigned BATCH     = BATCH_DEF,
  parameter int unsigned VEC       = VEC_LEN,
  parameter int unsigned LINES     = 8192
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              instr_valid [N_THREADS],
  output logic              instr_ready [N_THREADS],
  input  logic [31:0]       instr       [N_THREADS],
  input  logic [ADDR_W-1:0] rw_val      [N_THREADS],
  input  logic [ADDR_W-1:0] ri_val      [N_THREADS],
  input  logic [ADDR_W-1:0] rd_val      [N_THREADS],
  input  logic              kv_mode     [N_THREADS],
  output logic [ADDR_W-1:0] tile_addr   [N_THREADS],
  output logic [ADDR_W-1:0] tile_stride [N_THREADS],
  input  logic              fill_valid  [N_THREADS],
  input  logic [ADDR_W-1:0] fill_addr   [N_THREADS],
  input  logic [BLK_W-1:0]  fill_data   [N_THREADS],
  input  logic              fill_done   [N_THREADS],
  output logic              fill_ready  [N_THREADS],
  output logic              in_req_valid [N_THREADS],
  output logic [ADDR_W-1:0] in_req_addr  [N_THREADS],
  input  logic              in_rsp_valid [N_THREADS],
  input  logic [BLK_W-1:0]  in_rsp_data  [N_THREADS],
  output logic              out_valid   [N_THREADS],
  input  logic              out_ready   [N_THREADS],
  output logic [ADDR_W-1:0] out_addr    [N_THREADS],
  output logic [31:0]       out_data    [N_THREADS][OUT_LANES],
  output logic              busy        [N_THREADS],
  output logic [31:0]       cnt_instr   [N_THREADS],
  output logic [31:0]       cnt_stall   [N_THREADS],
  output logic [31:0]       cnt_prt_lookup [N_THREADS],
  output logic [31:0]       cnt_prt_hit [N_THREADS],
  output logic [31:0]       cnt_zero_skip [N_THREADS]
);
  localparam int unsigned LW      = $clog2(LINES);
  localparam int unsigned CHUNK_W = $clog2(COLS * CONT_W / 8);   // 9: 512-byte chunks

  for (genvar t = 0; t < N_THREADS; t++) begin : g_thr
    logic              fbank;
    logic              f_slice;
    logic [LW-1:0]     f_line;
    logic              rd_en, rd_bank;
    logic [LW-1:0]     rd_line;
    logic [BLK_W-1:0]  sl_q [2];
    logic              cmd_valid [2], cmd_ready [2], rd_done [2], conv_done [2];
    logic              conv_busy [2];
    logic              conv_start;
    rcu_cmd_t          cmd [2];
    logic [ACC_W-1:0]  acc_vec [2][COLS];
    logic [CONV_N-1:0] conv_in [2][COLS];
    logic [31:0]       fp_vec  [2][COLS];

    addr_hasher #(.N_SLICES(2), .LINE_W(LW), .OFF_W(ADDR_W), .CHUNK_W(CHUNK_W)) u_hash (
      .addr(fill_addr[t]), .slice(f_slice), .line(f_line)
    );

    dfm #(.COLS(COLS), .NBW(NBW), .BATCH(BATCH), .VEC(VEC), .LINES(LINES)) u_dfm (
      .clk, .rst_n,
      .instr_valid(instr_valid[t]), .instr_ready(instr_ready[t]), .instr(instr[t]),
      .rw_val(rw_val[t]), .ri_val(ri_val[t]), .rd_val(rd_val[t]), .kv_mode(kv_mode[t]),
      .tile_addr(tile_addr[t]), .tile_stride(tile_stride[t]),
      .fill_done(fill_done[t]), .fill_bank(fbank), .fill_ready(fill_ready[t]),
      .in_req_valid(in_req_valid[t]), .in_req_addr(in_req_addr[t]),
      .in_rsp_valid(in_rsp_valid[t]), .in_rsp_data(in_rsp_data[t]),
      .sl_rd_en(rd_en), .sl_rd_bank(rd_bank), .sl_rd_line(rd_line),
      .cs_cmd_valid(cmd_valid), .cs_cmd_ready(cmd_ready), .cs_cmd(cmd),
      .cs_acc_vec(acc_vec), .cs_rd_done(rd_done),
      .cs_conv_start(conv_start), .cs_conv_in(conv_in),
      .cs_conv_done(conv_done), .cs_fp_vec(fp_vec),
      .out_valid(out_valid[t]), .out_ready(out_ready[t]), .out_addr(out_addr[t]),
      .out_data(out_data[t]),
      .busy(busy[t]), .cnt_instr(cnt_instr[t]), .cnt_stall(cnt_stall[t]),
      .cnt_prt_lookup(cnt_prt_lookup[t]), .cnt_prt_hit(cnt_prt_hit[t]),
      .cnt_zero_skip(cnt_zero_skip[t])
    );

    for (genvar c = 0; c < 2; c++) begin : g_cs
      llc_slice #(.LINES(LINES), .W(BLK_W)) u_slice (
        .clk,
        .wr_en(fill_valid[t] && f_slice == 1'(c)), .wr_bank(fbank), .wr_line(f_line),
        .wr_data(fill_data[t]),
        .rd_en, .rd_bank, .rd_line, .rd_data(sl_q[c])
      );

      csram #(.ROWS(ROWS), .COLS(COLS), .NBW(NBW), .BATCH(BATCH)) u_cs (
        .clk, .rst_n,
        .cmd_valid(cmd_valid[c]), .cmd_ready(cmd_ready[c]), .cmd(cmd[c]), .wblk(sl_q[c]),
        .acc_vec(acc_vec[c]), .rd_done(rd_done[c]),
        .conv_start, .conv_in(conv_in[c]), .conv_busy(conv_busy[c]),
        .conv_done(conv_done[c]), .fp_vec(fp_vec[c])
      );
    end
  end
endmodule
