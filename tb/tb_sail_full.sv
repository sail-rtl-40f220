// tb_sail_full -- one lutmm_1k per thread on the fabric at its default size
// (16 threads, 512-column C-SRAMs, 1024x1024 tiles, batch 8, NBW 2).
//
// Even threads run a row-mode 4-bit tile, odd threads a KV-mode 5-bit tile;
// the testbench plays the fill engine, the data cache and the core as in
// tb_sail_top, issues each instruction before its tile is written (so the
// DFM stalls), and checks all 16 x 8 x (1024 or 512) FP32 results against
// dot products computed here. The top keeps all its default parameters.
module tb_sail_full;
  import sail_pkg::*;
  import sail_tb_pkg::*;
  localparam int NT = 16, COLS = 512, VEC = 1024, BATCH = 8, LINES = 8192, NBW = 2;
  localparam int NJOBS = 1;
  localparam longint WATCHDOG = 20_000_000;

  logic clk = 0, rst_n = 0;
  logic              instr_valid [NT], instr_ready [NT], kv_mode [NT];
  logic [31:0]       instr [NT], rw_val [NT], ri_val [NT], rd_val [NT];
  logic [31:0]       tile_addr [NT], tile_stride [NT];
  logic              fill_valid [NT], fill_done [NT], fill_ready [NT];
  logic [31:0]       fill_addr [NT];
  logic [511:0]      fill_data [NT];
  logic              in_req_valid [NT], in_rsp_valid [NT];
  logic [31:0]       in_req_addr [NT];
  logic [511:0]      in_rsp_data [NT];
  logic              out_valid [NT], out_ready [NT], busy [NT];
  logic [31:0]       out_addr [NT];
  logic [31:0]       out_data [NT][OUT_LANES];
  logic [31:0]       cnt_instr [NT], cnt_stall [NT], cnt_prt_lookup [NT], cnt_prt_hit [NT],
                     cnt_zero_skip [NT];

  sail_top dut (.*);

  always #5 clk = ~clk;

  // ---------------- job table ----------------
  typedef struct { bit valid; bit kv; int wb; } job_t;
  function automatic job_t job(input int t, input int j);
    job_t r;
    r.valid = 1;
    unique case (t % 2)
      0: begin
        r.kv = (j == 2); r.wb = (j == 0) ? 4 : (j == 1) ? 2 : 8;
      end
      default: begin
        r.kv = (j == 0); r.wb = (j == 0) ? 5 : 6; r.valid = (j < 2);
      end
    endcase
    return r;
  endfunction

  byte         w  [NT][NJOBS][VEC][VEC];
  byte unsigned xv [NT][NJOBS][BATCH][VEC];
  logic [31:0] got [longint];
  int checks = 0, failures = 0;
  int n_overlap = 0, n_backpressure = 0, n_kv = 0, n_row = 0;
  int prec_seen [9];
  int cur_job [NT];
  int jobs_of [NT];

  function automatic longint key(input int t, input logic [31:0] a);
    return (longint'(t) << 36) | longint'(a);
  endfunction
  function automatic logic [31:0] rd_of(input int t, input int j);
    return 32'h8000_0000 + 32'(t) * 32'h0010_0000 + 32'(j) * 32'h0001_0000;
  endfunction
  function automatic logic [31:0] ri_of(input int t, input int j);
    return 32'h4000_0000 + 32'(t) * 32'h0010_0000 + 32'(j) * 32'h0001_0000;
  endfunction

  // ---------------- watchdog ----------------
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- data generation ----------------
  initial begin
    for (int t = 0; t < NT; t++) begin
      jobs_of[t] = 0;
      for (int j = 0; j < NJOBS; j++) begin
        job_t jb;
        jb = job(t, j);
        if (!jb.valid) continue;
        jobs_of[t]++;
        for (int r = 0; r < VEC; r++)
          for (int c = 0; c < VEC; c++)
            w[t][j][r][c] = byte'(sext($urandom, jb.wb));
        for (int b = 0; b < BATCH; b++)
          for (int i = 0; i < VEC; i++) begin
            // keep results inside 24 bits: 8-bit weights take 7-bit activations
            xv[t][j][b][i] = (jb.wb == 8) ? byte'($urandom_range(0, 127))
                                          : byte'($urandom_range(0, 255));
            if ($urandom_range(0, 9) == 0) xv[t][j][b][i] = 0;
          end
      end
    end
  end

  // ---------------- per-thread drivers ----------------
  for (genvar t = 0; t < NT; t++) begin : g_drv
    // fill engine: one tile per job into the free bank
    initial begin
      fill_valid[t] = 0; fill_done[t] = 0; fill_addr[t] = 0; fill_data[t] = 0;
      wait (rst_n);
      for (int j = 0; j < NJOBS; j++) begin
        job_t jb;
        int rowb, nblk;
        jb = job(t, j);
        if (!jb.valid) continue;
        if (j == 0) repeat (40) @(negedge clk);   // first tile late: forces a stall
        @(negedge clk);
        while (!fill_ready[t]) @(negedge clk);
        if (busy[t]) n_overlap++;
        rowb = jb.kv ? COLS : VEC;
        nblk = rowb / 64;
        for (int r = 0; r < VEC; r++)
          for (int bk = 0; bk < nblk; bk++) begin
            fill_valid[t] = 1;
            fill_addr[t]  = 32'(r * rowb + bk * 64);
            for (int e = 0; e < 64; e++) fill_data[t][e*8 +: 8] = w[t][j][r][bk*64+e];
            @(negedge clk);
          end
        fill_valid[t] = 0;
        fill_done[t] = 1; @(negedge clk); fill_done[t] = 0;
      end
    end

    // core: issue the instructions back to back
    initial begin
      instr_valid[t] = 0; instr[t] = 0; rw_val[t] = 0; ri_val[t] = 0; rd_val[t] = 0;
      kv_mode[t] = 0; cur_job[t] = 0;
      wait (rst_n);
      @(negedge clk);
      for (int j = 0; j < NJOBS; j++) begin
        job_t jb;
        jb = job(t, j);
        if (!jb.valid) continue;
        while (!instr_ready[t]) @(negedge clk);
        cur_job[t] = j;
        instr_valid[t] = 1;
        instr[t] = {5'd0, 2'd0, 5'd1, 5'd2, 3'(jb.wb - 1), 5'd3, OPC_LUTMM};
        rw_val[t] = 32'h1000_0000; ri_val[t] = ri_of(t, j); rd_val[t] = rd_of(t, j);
        kv_mode[t] = jb.kv;
        prec_seen[jb.wb]++;
        if (jb.kv) n_kv++; else n_row++;
        @(negedge clk);
        instr_valid[t] = 0;
        @(negedge clk);
      end
    end

    // data cache: answer one input block request a cycle later
    initial begin
      in_rsp_valid[t] = 0; in_rsp_data[t] = 0;
      forever begin
        @(negedge clk);
        in_rsp_valid[t] = 0;
        if (in_req_valid[t]) begin
          int rel, b, i0;
          rel = int'(in_req_addr[t] - ri_of(t, cur_job[t]));
          b = rel / VEC; i0 = rel % VEC;
          @(negedge clk);
          for (int e = 0; e < 64; e++) in_rsp_data[t][e*8 +: 8] = xv[t][cur_job[t]][b][i0+e];
          in_rsp_valid[t] = 1;
        end
      end
    end

    // result sink with random back-pressure
    always @(negedge clk) out_ready[t] <= ($urandom_range(0, 3) != 0);
    always @(posedge clk) if (rst_n && out_valid[t]) begin
      if (out_ready[t])
        for (int l = 0; l < OUT_LANES; l++) got[key(t, out_addr[t] + 32'(4 * l))] = out_data[t][l];
      else n_backpressure++;
    end
  end

  // ---------------- checking ----------------
  task automatic mech(input bit ok, input string name);
    checks++;
    if (!ok) begin failures++; $display("FAIL mechanism never happened: %s", name); end
  endtask

  initial begin
    int stall, hits, zs, ncols;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < NT; t++) wait (cnt_instr[t] == 32'(jobs_of[t]));
    repeat (5) @(negedge clk);
    for (int t = 0; t < NT; t++)
      for (int j = 0; j < NJOBS; j++) begin
        job_t jb;
        jb = job(t, j);
        if (!jb.valid) continue;
        ncols = jb.kv ? COLS : VEC;
        for (int b = 0; b < BATCH; b++)
          for (int c = 0; c < ncols; c++) begin
            longint acc;
            logic [31:0] a, exp_fp;
            acc = 0;
            for (int r = 0; r < VEC; r++) acc += longint'(xv[t][j][b][r]) * longint'(w[t][j][r][c]);
            exp_fp = to_fp32(acc);
            a = rd_of(t, j) + 32'(4 * (b * ncols + c));
            checks++;
            if (!got.exists(key(t, a))) begin
              failures++; if (failures < 10) $display("FAIL t%0d j%0d b%0d c%0d missing", t, j, b, c);
            end else if (got[key(t, a)] != exp_fp) begin
              failures++;
              if (failures < 10) $display("FAIL t%0d j%0d b%0d c%0d got %h exp %h (%0d)", t, j, b, c,
                                          got[key(t, a)], exp_fp, acc);
            end
          end
      end
    stall = 0; hits = 0; zs = 0;
    for (int t = 0; t < NT; t++) begin
      stall += int'(cnt_stall[t]); hits += int'(cnt_prt_hit[t]); zs += int'(cnt_zero_skip[t]);
    end
    $display("mechanisms: stall_cycles=%0d fill_overlap=%0d prt_hits=%0d zero_skips=%0d row=%0d kv=%0d backpressure=%0d",
             stall, n_overlap, hits, zs, n_row, n_kv, n_backpressure);
    mech(stall > 0, "tile stall");
    mech(n_overlap > 0 || NJOBS < 2, "fill overlapping compute (ping-pong)");
    mech(hits > 0, "PRT hit");
    mech(zs > 0, "zero-pattern skip");
    mech(n_row > 0, "row mode");
    mech(n_kv > 0, "KV mode aggregation");
    mech(n_backpressure > 0, "output back-pressure");
    for (int p = 2; p <= 8; p++) if (p != 3 && p != 7) mech(prec_seen[p] > 0 || NJOBS < 3 || NT < 2, $sformatf("%0d-bit weights", p));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
