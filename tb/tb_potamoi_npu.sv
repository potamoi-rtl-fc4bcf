// tb_potamoi_npu: end-to-end test of the augmented NPU with every parameter
// at its default (32-channel feature table with 2 ports, 128-entry RIT,
// 24 x 24 array, 1.5 MB feature buffer, 20-iteration exp unit).
//
// The testbench acts as DMA, control processor and host. It renders a small
// frame slice in the streaming order: gather one MVoxel, then the next,
// while layers run on what was gathered.
//   1. weights for two layers are loaded;
//   2. MVoxel A (structured grid, 128 ray samples, trilinear) is gathered
//      into buffer half 0 while the DMA already loads MVoxel B
//      (unstructured, 1536 points);
//   3. MVoxel B is gathered into half 0 rows 200.. while three layer tiles
//      run: ReLU and exp on samples of A, pass on points of B. Their
//      write-backs collide with the gatherer on the single buffer write
//      port, and the gatherer's FIFOs fill up and stall its issue;
//   4. the second channel segment of MVoxel B (same index table, keep_rit)
//      is gathered into half 1 rows 2000.., its features loaded during 3;
//   5. a ReLU layer over the 64-channel points of MVoxel B: two commands,
//      one per segment, the second adding onto the first one's sums.
// Every written row is then read back through the host port and compared
// with results computed here (trilinear sums, copies, 32-bit GEMM, shift,
// saturation, ReLU, exp within 3 LSB). The structured job's issue rate
// (8 cycles per sample pair) is checked. Each mechanism is counted and a
// failure recorded if one never happened: structured gather, unstructured
// gather, buffer swap, DMA during processing, keep_rit reuse, FIFO stall,
// write-port conflict, pass / ReLU / exp layers, two-segment layer.
module tb_potamoi_npu;
  import potamoi_pkg::*;
  localparam int B = 32, COLS = 24, ROWS = 24;
  logic clk = 1'b0, rst_n = 1'b0;
  logic rit_wr_en = 0; logic [RIT_AW-1:0] rit_wr_addr = '0; logic [RIT_WORD_W-1:0] rit_wr_data = '0;
  logic mft_wr_en = 0; logic [MFT_AW-1:0] mft_wr_addr = '0; logic [B-1:0][FEAT_W-1:0] mft_wr_data = '0;
  logic wb_wr_en = 0;  logic [WB_AW-1:0] wb_wr_addr = '0;   logic [COLS-1:0][FEAT_W-1:0] wb_wr_data = '0;
  logic gu_job_valid = 0, gu_job_ready;
  gu_job_t gu_job;
  logic gemm_cmd_valid = 0, gemm_cmd_ready;
  gemm_cmd_t gemm_cmd;
  logic host_rd_en = 0, host_rd_half = 0; logic [GFB_AW-1:0] host_rd_addr = '0;
  logic [B-1:0][FEAT_W-1:0] host_rd_data;
  logic gu_busy, gemm_busy, rit_fill_buf, mft_fill_buf;
  logic [31:0] gu_stall_cycles, gfb_conflict_cycles, gu_jobs_done, gemm_cmds_done;
  int checks = 0, failures = 0;

  potamoi_npu dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stimulus images and expected buffer contents ----------------
  logic [RIT_ENTRY_W-1:0]     rit_src [3][128];
  logic [B-1:0][FEAT_W-1:0]   mft_src [3][512];
  logic [COLS-1:0][FEAT_W-1:0] wgt [64];
  logic [B-1:0][FEAT_W-1:0]   exp_row [int];
  bit                         exp_is_exp [int];

  // mechanism counters
  int n_struct = 0, n_unstruct = 0, n_keep = 0, n_swap = 0, n_dma_overlap = 0;
  int n_relu = 0, n_exp = 0, n_pass = 0, n_seg_layer = 0;

  always @(posedge clk) if (rst_n) begin
    if ((rit_wr_en || mft_wr_en) && gu_busy) n_dma_overlap++;
  end
  logic rit_fill_q = 0;
  always @(posedge clk) begin
    if (rst_n && rit_fill_buf != rit_fill_q) n_swap++;
    rit_fill_q <= rit_fill_buf;
  end

  function automatic logic [15:0] sat16(longint v);
    if (v > 32767) return 16'sd32767;
    if (v < -32768) return 16'h8000;
    return 16'(v);
  endfunction

  function automatic logic [15:0] feat();
    return 16'(int'($urandom_range(0, 2048)) - 1024);   // |f| <= 0.25 in Q3.12
  endfunction

  task automatic dma_rit(int set);
    for (int a = 0; a < 768; a++) begin
      @(negedge clk);
      rit_wr_en = 1; rit_wr_addr = RIT_AW'(a); rit_wr_data = rit_src[set][a / 6][64 * (a % 6) +: 64];
    end
    @(negedge clk); rit_wr_en = 0;
  endtask

  task automatic dma_mft(int set);
    for (int p = 0; p < 512; p++) begin
      @(negedge clk);
      mft_wr_en = 1; mft_wr_addr = MFT_AW'(p); mft_wr_data = mft_src[set][p];
    end
    @(negedge clk); mft_wr_en = 0;
  endtask

  task automatic expect_job(int rset, int fset, rep_e md, int n, int base, bit half, int obase);
    for (int s = 0; s < n; s++) begin
      logic [B-1:0][FEAT_W-1:0] e;
      if (md == REP_STRUCTURED) begin
        for (int b = 0; b < B; b++) begin
          longint acc = 0;
          for (int v = 0; v < 8; v++) begin
            logic [47:0] slot = rit_src[rset][s][48*v +: 48];
            acc += longint'(slot[15:0]) * longint'($signed(mft_src[fset][int'(9'(slot[47:16] - 32'(base)))][b]));
          end
          e[b] = sat16(acc >>> 15);
        end
      end else begin
        logic [31:0] pid = rit_src[rset][s / 12][32 * (s % 12) +: 32];
        e = mft_src[fset][int'(9'(pid - 32'(base)))];
      end
      exp_row[{half, GFB_AW'(obase + s)}] = e;
    end
  endtask

  task automatic submit_job(rep_e md, int n, int base, bit half, int obase, bit keep);
    @(negedge clk);
    gu_job.mode = md; gu_job.count = CNT_W'(n); gu_job.base = 32'(base);
    gu_job.out_half = half; gu_job.out_base = GFB_AW'(obase); gu_job.keep_rit = keep;
    gu_job_valid = 1;
    while (!gu_job_ready) @(negedge clk);
    @(negedge clk);
    gu_job_valid = 0;
    if (md == REP_STRUCTURED) n_struct++; else n_unstruct++;
    if (keep) n_keep++;
  endtask

  // layer tile: reference from the expected buffer contents, then run it
  task automatic run_layer(bit a_half, int a_base, int nrows, int w_base, bit o_half, int o_base, int sh, vop_e op);
    gemm_cmd_t c;
    c = '0;
    c.a_half = a_half; c.a_base = GFB_AW'(a_base); c.nrows = 5'(nrows); c.k = 6'(32);
    c.w_base = WB_AW'(w_base); c.out_half = o_half; c.out_base = GFB_AW'(o_base); c.shift = 5'(sh); c.op = op;
    for (int r = 0; r < nrows; r++) begin
      logic [B-1:0][FEAT_W-1:0] in_row = exp_row[{a_half, GFB_AW'(a_base + r)}];
      logic [B-1:0][FEAT_W-1:0] e = '0;
      for (int j = 0; j < COLS; j++) begin
        int acc = 0;
        int q;
        for (int kk = 0; kk < 32; kk++) acc += int'($signed(in_row[kk])) * int'($signed(wgt[w_base + kk][j]));
        q = int'($signed(sat16(longint'(acc >>> sh))));
        if (op == VOP_RELU && q < 0) q = 0;
        if (op == VOP_EXP) q = int'($exp(real'(q) / 4096.0) * 4096.0 + 0.5);
        e[j] = 16'(q);
      end
      exp_row[{o_half, GFB_AW'(o_base + r)}] = e;
      exp_is_exp[{o_half, GFB_AW'(o_base + r)}] = (op == VOP_EXP);
    end
    @(negedge clk);
    gemm_cmd = c; gemm_cmd_valid = 1;
    while (!gemm_cmd_ready) @(negedge clk);
    @(negedge clk);
    gemm_cmd_valid = 0;
    while (!gemm_cmd_ready) @(negedge clk);
    case (op)
      VOP_RELU: n_relu++;
      VOP_EXP:  n_exp++;
      default:  n_pass++;
    endcase
  endtask

  // layer over a 64-channel feature held as two 32-channel segments
  task automatic run_layer_2seg(bit h0, int b0, bit h1, int b1, int nrows, bit o_half, int o_base, int sh);
    gemm_cmd_t c;
    for (int r = 0; r < nrows; r++) begin
      logic [B-1:0][FEAT_W-1:0] s0 = exp_row[{h0, GFB_AW'(b0 + r)}];
      logic [B-1:0][FEAT_W-1:0] s1 = exp_row[{h1, GFB_AW'(b1 + r)}];
      logic [B-1:0][FEAT_W-1:0] e = '0;
      for (int j = 0; j < COLS; j++) begin
        int acc = 0;
        int q;
        for (int kk = 0; kk < 32; kk++) acc += int'($signed(s0[kk])) * int'($signed(wgt[kk][j]));
        for (int kk = 0; kk < 32; kk++) acc += int'($signed(s1[kk])) * int'($signed(wgt[32 + kk][j]));
        q = int'($signed(sat16(longint'(acc >>> sh))));
        e[j] = 16'(q < 0 ? 0 : q);
      end
      exp_row[{o_half, GFB_AW'(o_base + r)}] = e;
    end
    for (int sg = 0; sg < 2; sg++) begin
      c = '0;
      c.a_half = sg ? h1 : h0; c.a_base = GFB_AW'(sg ? b1 : b0); c.nrows = 5'(nrows); c.k = 6'(32);
      c.w_base = WB_AW'(32 * sg); c.out_half = o_half; c.out_base = GFB_AW'(o_base); c.shift = 5'(sh);
      c.op = VOP_RELU; c.hold = (sg == 0); c.accumulate = (sg == 1);
      @(negedge clk);
      gemm_cmd = c; gemm_cmd_valid = 1;
      while (!gemm_cmd_ready) @(negedge clk);
      @(negedge clk);
      gemm_cmd_valid = 0;
      while (!gemm_cmd_ready) @(negedge clk);
    end
    n_seg_layer++;
    n_relu++;
  endtask

  task automatic require(int cnt, string what);
    checks++;
    if (cnt == 0) begin failures++; $display("mechanism never exercised: %s", what); end
    else $display("  %-28s %0d", what, cnt);
  endtask

  initial begin
    int t0, cyc;
    gu_job = '0; gemm_cmd = '0;
    // MVoxel A: structured, grid vertices at VIDs 1000..1511
    for (int r = 0; r < 128; r++) begin
      automatic int wrem = 32768;
      for (int v = 0; v < 8; v++) begin
        automatic int w = (v == 7) ? wrem : $urandom_range(0, wrem);
        wrem -= w;
        rit_src[0][r][48*v +: 48] = {32'(1000 + $urandom_range(0, 511)), 16'(w)};
      end
    end
    // MVoxel B: unstructured, primitive IDs 70000..70511
    for (int r = 0; r < 128; r++)
      for (int j = 0; j < 12; j++) rit_src[1][r][32*j +: 32] = 32'(70000 + $urandom_range(0, 511));
    for (int s = 0; s < 3; s++)
      for (int p = 0; p < 512; p++)
        for (int b = 0; b < B; b++) mft_src[s][p][b] = feat();
    for (int k = 0; k < 64; k++)
      for (int j = 0; j < COLS; j++) wgt[k][j] = feat();

    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. weights
    for (int k = 0; k < 64; k++) begin
      @(negedge clk);
      wb_wr_en = 1; wb_wr_addr = WB_AW'(k); wb_wr_data = wgt[k];
    end
    @(negedge clk); wb_wr_en = 0;

    // 2. MVoxel A, with MVoxel B's data streamed in meanwhile
    dma_rit(0); dma_mft(0);
    expect_job(0, 0, REP_STRUCTURED, 128, 1000, 0, 0);
    submit_job(REP_STRUCTURED, 128, 1000, 0, 0, 0);
    t0 = $time;
    fork
      begin dma_rit(1); dma_mft(1); end
      begin
        while (!gu_job_ready) @(negedge clk);
        cyc = int'(($time - t0) / 10) + 1;
        checks++;
        if (cyc != 2 + 8 * 64) begin failures++; $display("structured MVoxel took %0d cycles, expected %0d", cyc, 2 + 8 * 64); end
      end
    join
    while (gu_busy) @(negedge clk);

    // 3./4. MVoxel B and its second segment, layers in parallel
    expect_job(1, 1, REP_UNSTRUCTURED, 1536, 70000, 0, 200);
    expect_job(1, 2, REP_UNSTRUCTURED, 1536, 70000, 1, 2000);
    fork
      begin
        submit_job(REP_UNSTRUCTURED, 1536, 70000, 0, 200, 0);
        dma_mft(2);
        submit_job(REP_UNSTRUCTURED, 1536, 70000, 1, 2000, 1);
      end
      begin
        repeat (20) @(negedge clk);
        run_layer(0, 0,   24, 0,  1, 0,  12, VOP_RELU);
        run_layer(0, 24,  24, 32, 1, 24, 14, VOP_EXP);
        run_layer(0, 200, 24, 0,  1, 48, 10, VOP_NONE);
        run_layer(1, 0,   24, 32, 1, 72, 12, VOP_NONE);   // second layer on the ReLU output
      end
    join
    while (gu_busy || gemm_busy) @(negedge clk);

    // 5. a layer over both channel segments of MVoxel B's points
    run_layer_2seg(0, 200, 1, 2000, 24, 1, 96, 13);

    // read back and compare every row written
    foreach (exp_row[key]) begin
      @(negedge clk);
      host_rd_en = 1; host_rd_half = 1'(key >> GFB_AW); host_rd_addr = GFB_AW'(key);
      @(negedge clk);
      host_rd_en = 0;
      if (exp_is_exp.exists(key) && exp_is_exp[key]) begin
        for (int j = 0; j < B; j++) begin
          automatic int d = int'($signed(host_rd_data[j])) - int'($signed(exp_row[key][j]));
          checks++;
          if (d > 3 || d < -3) begin failures++; $display("exp row %0h ch %0d off by %0d", key, j, d); end
        end
      end else begin
        checks++;
        if (host_rd_data !== exp_row[key]) begin failures++; $display("row half %0d addr %0d wrong", key >> GFB_AW, key & 16'h3fff); end
      end
    end

    $display("mechanisms:");
    require(n_struct, "structured gather");
    require(n_unstruct, "unstructured gather");
    require(n_swap, "RIT buffer swap");
    require(n_dma_overlap, "DMA during processing");
    require(n_keep, "keep_rit segment reuse");
    require(int'(gu_stall_cycles), "GU FIFO stall cycles");
    require(int'(gfb_conflict_cycles), "write-port conflict cycles");
    require(n_pass, "pass layers");
    require(n_relu, "ReLU layers");
    require(n_exp, "exp layers");
    require(n_seg_layer, "two-segment layers");
    checks++;
    if (gemm_cmds_done != 6) begin failures++; $display("gemm_cmds_done = %0d", gemm_cmds_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
