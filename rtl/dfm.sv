// dfm -- data feeding module: the controller of one lutmm_1k thread.
//
// The DFM executes lutmm_1k on a pair of C-SRAMs, each next to one LLC slice.
// The weight tile already sits in the slices (one ping-pong bank, filled by
// the memory side, see fill_*); the DFM then
//   1. fetches the BATCH input vectors (1024 unsigned 8-bit activations each)
//      from the data cache through in_req/in_rsp, 64 per 512-bit block;
//   2. waits until the compute bank of the slices is full (stall otherwise);
//   3. clears the accumulators, and for every group g of NBW weight rows:
//      reads the rows from both slices and has each C-SRAM transpose them
//      into its single-weight LUT entries (LOADW), builds the multi-weight
//      entries (BUILD), then broadcasts, for every batch element b and
//      activation bit k, the NBW-bit pattern of the group's activations
//      (ACCUM); the pattern's MSB belongs to the group's first row;
//   4. reads every batch element's accumulators out of both C-SRAMs,
//      adds the two halves in KV mode (adder tree), has the C-SRAMs convert
//      the integers to FP32, and streams the results, OUT_LANES floats per
//      beat, to out_addr = rd + 4 * (b * out_len + column);
//   5. frees the bank and swaps the ping-pong banks.
//
// Two mappings (kv_mode, sampled with the instruction):
//   row mode (Q/K/V, FFN): the tile is 1024 x 1024; C-SRAM c holds output
//     columns c*512 .. c*512+511 of all 1024 rows; 1024 outputs.
//   KV mode: the tile is 1024 x 512 with 512-byte rows, which the address
//     hasher deals alternately to the slices; C-SRAM c holds rows 2r+c, both
//     hold the same 512 output columns, and their partial sums are added.
//
// The pattern reuse table (prt) is looked up with a hash of (shift, patterns)
// for every broadcast and flushed per group; it counts hits (prt_hits). In
// this design a hit does not skip the C-SRAM operation, because every batch
// element accumulates in its own rows.
//
// Handshakes: instr_valid/instr_ready; in_req_valid stays high until
// in_rsp_valid; out_valid/out_ready; fill_done pulses once per complete tile
// written to bank fill_bank, allowed only while fill_ready.
//
// From the paper: steps 1-5, per-group LUT building, NBW-bit broadcast,
// aggregation of the two C-SRAMs in the DFM, ping-pong slice halves, the
// 32-entry PRT with a 32-bit hash. Own choices: the command protocol, the
// KV-mode row interleave, the mode bit outside the instruction, and the
// output address arithmetic.
module dfm
  import sail_pkg::*;
#(
  parameter int unsigned COLS   = CS_COLS,
  parameter int unsigned NBW    = NBW_DEF,
  parameter int unsigned BATCH  = BATCH_DEF,
  parameter int unsigned VEC    = VEC_LEN,
  parameter int unsigned ACCW   = ACC_W,
  parameter int unsigned CONVN  = CONV_N,
  parameter int unsigned LINES  = 8192
) (
  input  logic              clk,
  input  logic              rst_n,
  // instruction from the core
  input  logic              instr_valid,
  output logic              instr_ready,
  input  logic [31:0]       instr,
  input  logic [ADDR_W-1:0] rw_val,
  input  logic [ADDR_W-1:0] ri_val,
  input  logic [ADDR_W-1:0] rd_val,
  input  logic              kv_mode,
  // tile to be fetched from DRAM (for the fill side)
  output logic [ADDR_W-1:0] tile_addr,
  output logic [ADDR_W-1:0] tile_stride,
  // ping-pong bank management
  input  logic              fill_done,
  output logic              fill_bank,
  output logic              fill_ready,
  // input vector fetch
  output logic              in_req_valid,
  output logic [ADDR_W-1:0] in_req_addr,
  input  logic              in_rsp_valid,
  input  logic [BLK_W-1:0]  in_rsp_data,
  // slice read, same line in both slices
  output logic              sl_rd_en,
  output logic              sl_rd_bank,
  output logic [$clog2(LINES)-1:0] sl_rd_line,
  // C-SRAM pair
  output logic              cs_cmd_valid [2],
  input  logic              cs_cmd_ready [2],
  output rcu_cmd_t          cs_cmd [2],
  input  logic [ACCW-1:0]   cs_acc_vec [2][COLS],
  input  logic              cs_rd_done [2],
  output logic              cs_conv_start,
  output logic [CONVN-1:0]  cs_conv_in [2][COLS],
  input  logic              cs_conv_done [2],
  input  logic [31:0]       cs_fp_vec [2][COLS],
  // results to the core
  output logic              out_valid,
  input  logic              out_ready,
  output logic [ADDR_W-1:0] out_addr,
  output logic [31:0]       out_data [OUT_LANES],
  // status
  output logic              busy,
  output logic [31:0]       cnt_instr,
  output logic [31:0]       cnt_stall,
  output logic [31:0]       cnt_prt_lookup,
  output logic [31:0]       cnt_prt_hit,
  output logic [31:0]       cnt_zero_skip
);
  localparam int unsigned IN_BLKS  = VEC * ACT_BITS / BLK_W;   // 16
  localparam int unsigned IN_PER   = BLK_W / ACT_BITS;         // 64
  localparam int unsigned W_BLKS   = COLS * CONT_W / BLK_W;    // 8 blocks per weight row
  localparam int unsigned OBEATS   = COLS / OUT_LANES;         // 64
  localparam int unsigned LW       = $clog2(LINES);

  typedef enum logic [3:0] {
    D_IDLE, D_IN_REQ, D_WAIT_TILE, D_CLEAR, D_LW_RD, D_LW_CMD, D_BUILD, D_ACC,
    D_RD, D_RD_WAIT, D_CONV, D_CONV_WAIT, D_OUT, D_DONE
  } dstate_e;

  dstate_e state;

  // ---------------- decode ----------------
  logic              dec_is, kv_q;
  logic [3:0]        dec_bits, wbits_q;
  logic [ADDR_W-1:0] dec_tile, dec_stride, dec_in, dec_out, in_base, out_base;
  logic [15:0]       dec_col;

  lutmm_decoder u_dec (
    .instr, .rw_val, .ri_val, .rd_val,
    .is_lutmm(dec_is), .w_bits(dec_bits), .tile_addr(dec_tile), .row_stride(dec_stride),
    .col_first(dec_col), .in_addr(dec_in), .out_addr(dec_out)
  );

  // ---------------- state ----------------
  logic [ACT_BITS-1:0] xbuf [BATCH][VEC];
  logic [7:0]  b, k, i, blk, beat;
  logic [15:0] g;
  logic        c_out;
  logic        comp_bank;
  logic [1:0]  bank_full;
  logic [1:0]  sent, flag;
  logic [1:0]  fire;
  logic        issuing, all_sent;

  // rows per C-SRAM and number of groups
  logic [15:0] r_per, n_groups;
  always_comb begin
    r_per    = kv_q ? 16'(VEC / 2) : 16'(VEC);
    n_groups = (r_per + 16'(NBW) - 16'd1) / 16'(NBW);
  end

  // ---------------- patterns ----------------
  logic [7:0] pat [2];
  always_comb begin
    for (int c = 0; c < 2; c++) begin
      pat[c] = '0;
      for (int n = 0; n < NBW; n++) begin
        int lr, idx;
        lr  = int'(g) * NBW + n;
        idx = kv_q ? (2 * lr + c) : lr;
        if (lr < int'(r_per))
          pat[c][NBW-1-n] = xbuf[b][idx[$clog2(VEC)-1:0]][k[$clog2(ACT_BITS)-1:0]];
      end
    end
  end

  // ---------------- PRT ----------------
  logic [31:0] prt_key;
  logic        prt_hit;
  logic [15:0] prt_data;
  logic        prt_flush, prt_ins;
  assign prt_key = {8'd0, k, pat[1], pat[0]} * 32'h9E37_79B1;
  prt #(.ENTRIES(PRT_ENTRIES), .KEY_W(PRT_KEY_W), .DATA_W(16)) u_prt (
    .clk, .rst_n, .flush(prt_flush), .key(prt_key), .hit(prt_hit), .hit_data(prt_data),
    .insert(prt_ins), .ins_data({pat[1], pat[0]})
  );

  // ---------------- command issue ----------------
  always_comb begin
    issuing = (state inside {D_CLEAR, D_LW_CMD, D_BUILD, D_ACC, D_RD});
    for (int c = 0; c < 2; c++) begin
      cs_cmd_valid[c] = issuing && !sent[c];
      fire[c]         = cs_cmd_valid[c] && cs_cmd_ready[c];
      cs_cmd[c]       = '0;
      cs_cmd[c].w_bits = wbits_q;
      cs_cmd[c].blk    = blk;
      cs_cmd[c].entry  = 8'(1 << (NBW - 1 - int'(i)));
      cs_cmd[c].batch  = b;
      cs_cmd[c].shift  = k;
      cs_cmd[c].pattern = pat[c];
      unique case (state)
        D_CLEAR:  cs_cmd[c].op = RCU_CLEAR;
        D_LW_CMD: cs_cmd[c].op = RCU_LOADW;
        D_BUILD:  cs_cmd[c].op = RCU_BUILD;
        D_ACC:    cs_cmd[c].op = RCU_ACCUM;
        default:  cs_cmd[c].op = RCU_READ;
      endcase
    end
    all_sent = issuing && ((sent | fire) == 2'b11);
    prt_flush = (state == D_BUILD) && all_sent;
    prt_ins   = (state == D_ACC) && all_sent && !prt_hit;
  end

  // ---------------- other outputs ----------------
  always_comb begin
    instr_ready  = (state == D_IDLE);
    busy         = (state != D_IDLE);
    in_req_valid = (state == D_IN_REQ);
    in_req_addr  = in_base + ADDR_W'(int'(b) * VEC + int'(blk) * IN_PER);
    sl_rd_en     = (state == D_LW_RD);
    sl_rd_bank   = comp_bank;
    sl_rd_line   = LW'((int'(g) * NBW + int'(i)) * W_BLKS + int'(blk));
    fill_ready   = !bank_full[fill_bank];
    cs_conv_start = (state == D_CONV);
    for (int j = 0; j < COLS; j++) begin
      logic [CONVN-1:0] a0, a1;
      a0 = CONVN'(signed'(cs_acc_vec[0][j]));
      a1 = CONVN'(signed'(cs_acc_vec[1][j]));
      cs_conv_in[0][j] = kv_q ? (a0 + a1) : a0;
      cs_conv_in[1][j] = a1;
    end
    out_valid = (state == D_OUT);
    out_addr  = out_base + ADDR_W'(4 * (int'(b) * (kv_q ? COLS : 2 * COLS)
                                        + int'(c_out) * COLS + int'(beat) * OUT_LANES));
    for (int l = 0; l < OUT_LANES; l++)
      out_data[l] = cs_fp_vec[c_out][int'(beat) * OUT_LANES + l];
  end

  // ---------------- sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= D_IDLE; kv_q <= 1'b0; wbits_q <= 4'd4;
      tile_addr <= '0; tile_stride <= '0; in_base <= '0; out_base <= '0;
      b <= '0; k <= '0; i <= '0; blk <= '0; beat <= '0; g <= '0; c_out <= 1'b0;
      comp_bank <= 1'b0; fill_bank <= 1'b0; bank_full <= '0; sent <= '0; flag <= '0;
      cnt_instr <= '0; cnt_stall <= '0; cnt_prt_lookup <= '0; cnt_prt_hit <= '0;
      cnt_zero_skip <= '0;
    end else begin
      // fill side of the ping-pong buffer
      if (fill_done && !bank_full[fill_bank]) begin
        bank_full[fill_bank] <= 1'b1;
        fill_bank <= ~fill_bank;
      end
      // command issue bookkeeping
      if (issuing) sent <= all_sent ? 2'b00 : (sent | fire);

      unique case (state)
        D_IDLE: if (instr_valid && dec_is) begin
          kv_q <= kv_mode; wbits_q <= dec_bits;
          tile_addr <= dec_tile; tile_stride <= dec_stride;
          in_base <= dec_in; out_base <= dec_out;
          b <= '0; blk <= '0;
          state <= D_IN_REQ;
        end
        D_IN_REQ: if (in_rsp_valid) begin
          for (int e = 0; e < IN_PER; e++)
            xbuf[b][int'(blk) * IN_PER + e] <= in_rsp_data[e*ACT_BITS +: ACT_BITS];
          if (int'(blk) == IN_BLKS - 1) begin
            blk <= '0;
            if (int'(b) == BATCH - 1) begin b <= '0; state <= D_WAIT_TILE; end
            else b <= b + 8'd1;
          end else blk <= blk + 8'd1;
        end
        D_WAIT_TILE: begin
          if (bank_full[comp_bank]) state <= D_CLEAR;
          else cnt_stall <= cnt_stall + 32'd1;
        end
        D_CLEAR: if (all_sent) begin
          g <= '0; i <= '0; blk <= '0; state <= D_LW_RD;
        end
        D_LW_RD: state <= D_LW_CMD;
        D_LW_CMD: if (all_sent) begin
          if (int'(blk) == W_BLKS - 1) begin
            blk <= '0;
            if (int'(i) == NBW - 1) begin i <= '0; state <= D_BUILD; end
            else begin i <= i + 8'd1; state <= D_LW_RD; end
          end else begin
            blk <= blk + 8'd1; state <= D_LW_RD;
          end
        end
        D_BUILD: if (all_sent) begin
          b <= '0; k <= '0; state <= D_ACC;
        end
        D_ACC: if (all_sent) begin
          cnt_prt_lookup <= cnt_prt_lookup + 32'd1;
          if (prt_hit) cnt_prt_hit <= cnt_prt_hit + 32'd1;
          cnt_zero_skip <= cnt_zero_skip + 32'(pat[0] == 8'd0) + 32'(pat[1] == 8'd0);
          if (int'(k) == ACT_BITS - 1) begin
            k <= '0;
            if (int'(b) == BATCH - 1) begin
              b <= '0;
              if (g == n_groups - 16'd1) state <= D_RD;
              else begin g <= g + 16'd1; state <= D_LW_RD; end
            end else b <= b + 8'd1;
          end else k <= k + 8'd1;
        end
        D_RD: if (all_sent) begin flag <= '0; state <= D_RD_WAIT; end
        D_RD_WAIT: begin
          if ((flag | {cs_rd_done[1], cs_rd_done[0]}) == 2'b11) begin
            flag <= '0; state <= D_CONV;
          end else flag <= flag | {cs_rd_done[1], cs_rd_done[0]};
        end
        D_CONV: state <= D_CONV_WAIT;
        D_CONV_WAIT: begin
          if ((flag | {cs_conv_done[1], cs_conv_done[0]}) == 2'b11) begin
            flag <= '0; beat <= '0; c_out <= 1'b0; state <= D_OUT;
          end else flag <= flag | {cs_conv_done[1], cs_conv_done[0]};
        end
        D_OUT: if (out_ready) begin
          if (int'(beat) == OBEATS - 1) begin
            beat <= '0;
            if (!kv_q && !c_out) c_out <= 1'b1;
            else if (int'(b) == BATCH - 1) state <= D_DONE;
            else begin b <= b + 8'd1; state <= D_RD; end
          end else beat <= beat + 8'd1;
        end
        D_DONE: begin
          bank_full[comp_bank] <= 1'b0;
          comp_bank <= ~comp_bank;
          cnt_instr <= cnt_instr + 32'd1;
          state <= D_IDLE;
        end
        default: state <= D_IDLE;
      endcase
    end
  end

  // The fill side may only complete a tile into a free bank.
  property p_fill_free;
    @(posedge clk) disable iff (!rst_n) fill_done |-> fill_ready;
  endproperty
  a_fill_free: assert property (p_fill_free);
endmodule
