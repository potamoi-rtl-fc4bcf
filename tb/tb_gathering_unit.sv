// tb_gathering_unit: end-to-end check of the Gathering Unit at its default
// size (B = 32 channels, M = 2 ports, 128-entry RIT, 512-point MFT).
//
// The testbench plays DMA and Global Feature Buffer. It computes every
// expected output itself: trilinear sums sat((sum_v W_v * F[VID_v]) >>> 15)
// for structured samples, plain copies of F[PID] for unstructured points.
// Sequence:
//   job 1  structured, 128 samples, GFB sink always ready. Meanwhile the
//          DMA loads the next MVoxel (unstructured) into the fill halves.
//          Checks the issue rate: counted from the accept edge, the unit
//          is ready again after 2 + 8 * 64 cycles (accept, one priming
//          cycle, eight vertices per ray sample pair).
//   job 2  unstructured, 1536 points, sink ready 50% of cycles: the FIFOs
//          fill up and issue must stall (stall_cycles > 0) without loss.
//   job 3  same RIT (keep_rit), new feature segment loaded during job 2.
//          Sink always ready: the single GFB write port takes one row per
//          cycle, so the job must finish between 2 + 768 (issue bound) and
//          2 + 1536 + 4 (write-port bound) cycles.
//   job 4  small structured job whose RIT was loaded during job 3.
// Every result must arrive exactly once with the right half, row and data.
module tb_gathering_unit;
  import potamoi_pkg::*;
  localparam int B = 32, M = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  logic job_valid = 0, job_ready;
  gu_job_t job;
  logic rit_wr_en = 0; logic [RIT_AW-1:0] rit_wr_addr; logic [RIT_WORD_W-1:0] rit_wr_data;
  logic mft_wr_en = 0; logic [MFT_AW-1:0] mft_wr_addr; logic [B-1:0][FEAT_W-1:0] mft_wr_data;
  logic out_valid, out_ready = 1, out_half;
  logic [GFB_AW-1:0] out_addr;
  logic [B-1:0][FEAT_W-1:0] out_data;
  logic busy, rit_fill_buf, mft_fill_buf;
  logic [31:0] stall_cycles;
  int checks = 0, failures = 0;

  gathering_unit #(.B(B), .M(M)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // source images: [set] RIT entries and MFT points
  logic [RIT_ENTRY_W-1:0]     rit_src [4][128];
  logic [B-1:0][FEAT_W-1:0]   mft_src [4][512];

  // expected results keyed by {half, row}
  logic [B-1:0][FEAT_W-1:0] exp_data [int];
  int got_cnt [int];
  int ready_pct = 100;
  int dma_busy_writes = 0;

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      automatic int key = {out_half, out_addr};
      checks++;
      if (!exp_data.exists(key)) begin
        failures++; $display("unexpected result half %0d row %0d", out_half, out_addr);
      end else begin
        if (got_cnt.exists(key)) begin failures++; $display("duplicate row %0d", out_addr); end
        got_cnt[key] = 1;
        if (out_data !== exp_data[key]) begin
          failures++; $display("data mismatch half %0d row %0d", out_half, out_addr);
        end
      end
    end
    if ((rit_wr_en || mft_wr_en) && busy) dma_busy_writes++;
  end

  always @(negedge clk) out_ready <= ($urandom_range(1, 100) <= ready_pct);

  function automatic logic [15:0] sat16(longint v);
    if (v > 32767) return 16'sd32767;
    if (v < -32768) return 16'h8000;
    return 16'(v);
  endfunction

  task automatic make_structured(int set, int base);
    for (int r = 0; r < 128; r++) begin
      int wrem = 32768;
      for (int v = 0; v < 8; v++) begin
        int w = (v == 7) ? wrem : $urandom_range(0, wrem);
        wrem -= w;
        rit_src[set][r][48*v +: 48] = {32'(base + $urandom_range(0, 511)), 16'(w)};
      end
    end
  endtask

  task automatic make_unstructured(int set, int base);
    for (int r = 0; r < 128; r++)
      for (int j = 0; j < 12; j++) rit_src[set][r][32*j +: 32] = 32'(base + $urandom_range(0, 511));
  endtask

  task automatic make_mft(int set);
    for (int p = 0; p < 512; p++)
      for (int b = 0; b < B; b++) mft_src[set][p][b] = 16'($urandom);
  endtask

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
            int pt = int'(9'(slot[47:16] - 32'(base)));
            acc += longint'(slot[15:0]) * longint'($signed(mft_src[fset][pt][b]));
          end
          e[b] = sat16(acc >>> 15);
        end
      end else begin
        logic [31:0] pid = rit_src[rset][s / 12][32 * (s % 12) +: 32];
        e = mft_src[fset][int'(9'(pid - 32'(base)))];
      end
      exp_data[{half, GFB_AW'(obase + s)}] = e;
    end
  endtask

  // submit a job, return cycles from accept until the unit can take the next one
  task automatic run_job(rep_e md, int n, int base, bit half, int obase, bit keep, output int cyc);
    @(negedge clk);
    job.mode = md; job.count = CNT_W'(n); job.base = 32'(base);
    job.out_half = half; job.out_base = GFB_AW'(obase); job.keep_rit = keep;
    job_valid = 1;
    while (!job_ready) @(negedge clk);
    @(negedge clk);
    job_valid = 0;
    cyc = 1;
    while (!job_ready) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int cyc, rf, mf;
    job = '0;
    rit_wr_addr = '0; rit_wr_data = '0; mft_wr_addr = '0; mft_wr_data = '0;
    make_structured(0, 1000);   make_mft(0);
    make_unstructured(1, 5000); make_mft(1);
    make_mft(2);
    make_structured(3, 2000);   make_mft(3);
    repeat (3) @(posedge clk);
    rst_n = 1;

    // preload job 1 data
    dma_rit(0); dma_mft(0);
    expect_job(0, 0, REP_STRUCTURED, 128, 1000, 0, 0);
    rf = rit_fill_buf; mf = mft_fill_buf;

    // job 1 with DMA of job 2's data in parallel
    fork
      run_job(REP_STRUCTURED, 128, 1000, 0, 0, 0, cyc);
      begin @(negedge clk); @(negedge clk); dma_rit(1); dma_mft(1); end
    join
    checks++;
    if (cyc != 2 + 8 * 64) begin failures++; $display("structured job took %0d cycles, expected %0d", cyc, 2 + 8 * 64); end
    checks++;
    if (rit_fill_buf == rf[0] || mft_fill_buf == mf[0]) begin failures++; $display("buffers did not swap"); end
    checks++;
    if (stall_cycles != 0) begin failures++; $display("unexpected stall in structured job"); end

    // job 2 unstructured with a slow sink, MFT segment 2 loaded meanwhile
    expect_job(1, 1, REP_UNSTRUCTURED, 1536, 5000, 1, 0);
    ready_pct = 50;
    rf = rit_fill_buf;
    fork
      run_job(REP_UNSTRUCTURED, 1536, 5000, 1, 0, 0, cyc);
      begin @(negedge clk); @(negedge clk); dma_mft(2); end
    join
    checks++;
    if (stall_cycles == 0) begin failures++; $display("no FIFO stall seen"); end
    checks++;
    if (cyc < 1 + 768) begin failures++; $display("unstructured job faster than 2 points/cycle: %0d", cyc); end

    // job 3: next channel segment, same RIT; job 4's RIT loaded meanwhile
    ready_pct = 100;
    expect_job(1, 2, REP_UNSTRUCTURED, 1536, 5000, 0, 4000);
    rf = rit_fill_buf;
    fork
      run_job(REP_UNSTRUCTURED, 1536, 5000, 0, 4000, 1, cyc);
      begin @(negedge clk); @(negedge clk); dma_rit(3); dma_mft(3); end
    join
    checks++;
    if (rit_fill_buf != rf[0]) begin failures++; $display("keep_rit swapped the RIT"); end
    checks++;
    if (cyc < 2 + 768 || cyc > 2 + 1536 + 4) begin
      failures++; $display("unstructured job took %0d cycles, expected %0d..%0d", cyc, 2 + 768, 2 + 1536 + 4);
    end

    // job 4: small structured job, random sink
    ready_pct = 70;
    expect_job(3, 3, REP_STRUCTURED, 7, 2000, 1, 3000);
    rf = int'(stall_cycles);
    run_job(REP_STRUCTURED, 7, 2000, 1, 3000, 0, cyc);
    checks++;
    if (cyc - (int'(stall_cycles) - rf) != 2 + 8 * 4) begin
      failures++; $display("7-sample job took %0d cycles with %0d stalls", cyc, int'(stall_cycles) - rf);
    end

    while (busy) @(negedge clk);
    repeat (5) @(negedge clk);
    checks++;
    if (got_cnt.size() != exp_data.size()) begin
      failures++; $display("received %0d of %0d results", got_cnt.size(), exp_data.size());
    end
    checks++;
    if (dma_busy_writes == 0) begin failures++; $display("no DMA overlap"); end
    $display("stall cycles %0d, DMA writes during processing %0d", stall_cycles, dma_busy_writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
