// tb_gemm_controller: runs MLP layer tiles through the sequencer with the
// real systolic array (24 x 24) and vector unit, while the testbench models
// the Global Feature Buffer and the weight buffer (one-cycle registered
// reads, like the real buffers).
//
// Each command takes nrows (1..24) input rows of k (1..32) Q3.12 channels
// and a k x 24 weight block, and must write
//   op(sat16((sum_kk A[r][kk] * W[kk][j]) >>> shift))
// into row out_base + r (channels 24..31 zero). The reference is computed
// here in 32-bit integer arithmetic; pass and ReLU must match exactly, exp
// within 3 LSB (operands are kept small so the exp argument is in
// [-0.5, 0.5]). Commands 30..41 are layers over 2 or 3 channel segments:
// the first segment with hold, the middle ones with hold and accumulate,
// the last with accumulate; the sum then runs over all segments and only the
// last command writes. Also checks that no other row is written and the command
// latency, counted from the accept edge until ready again:
// (nrows + 1) load + (k + 49) feed + nrows * (vector latency + 1) cycles,
// where the vector latency is 1 (pass/ReLU) or 25 (exp).
module tb_gemm_controller;
  import potamoi_pkg::*;
  localparam int ROWS = 24, COLS = 24, KMAX = 32, ITERS = 20;
  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid = 0, cmd_ready;
  gemm_cmd_t cmd;
  logic gfb_rd_en, gfb_rd_half; logic [GFB_AW-1:0] gfb_rd_addr; logic [KMAX-1:0][FEAT_W-1:0] gfb_rd_data;
  logic wb_rd_en; logic [WB_AW-1:0] wb_rd_addr; logic [COLS-1:0][FEAT_W-1:0] wb_rd_data;
  logic sa_clear, sa_en;
  logic [ROWS-1:0][FEAT_W-1:0] sa_a;
  logic [COLS-1:0][FEAT_W-1:0] sa_b;
  logic [$clog2(ROWS)-1:0] sa_rd_row;
  logic [COLS-1:0][ACC_W-1:0] sa_rd_data;
  logic vu_start, vu_done, vu_busy;
  vop_e vu_op;
  logic [4:0] vu_shift;
  logic [COLS-1:0][FEAT_W-1:0] vu_res;
  logic wr_en, wr_half; logic [GFB_AW-1:0] wr_addr; logic [KMAX-1:0][FEAT_W-1:0] wr_data;
  logic busy;
  int checks = 0, failures = 0;

  gemm_controller #(.ROWS(ROWS), .COLS(COLS), .KMAX(KMAX)) dut (.*);
  systolic_array #(.ROWS(ROWS), .COLS(COLS)) u_sa (.clk, .rst_n, .clear(sa_clear), .en(sa_en), .a_in(sa_a),
                                                   .b_in(sa_b), .rd_row(sa_rd_row), .rd_data(sa_rd_data));
  vector_unit #(.LANES(COLS), .ITERS(ITERS)) u_vu (.clk, .rst_n, .start(vu_start), .op(vu_op), .shift(vu_shift),
                                                   .acc_in(sa_rd_data), .busy(vu_busy), .done(vu_done), .res(vu_res));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // buffer models
  logic [KMAX-1:0][FEAT_W-1:0] gfb [2][1024];
  logic [COLS-1:0][FEAT_W-1:0] wb [2048];
  int writes [int];
  always_ff @(posedge clk) begin
    if (gfb_rd_en) gfb_rd_data <= gfb[gfb_rd_half][gfb_rd_addr[9:0]];
    if (wb_rd_en)  wb_rd_data  <= wb[wb_rd_addr];
    if (wr_en) begin
      gfb[wr_half][wr_addr[9:0]] <= wr_data;
      writes[{wr_half, wr_addr}] = 1;
    end
  end

  function automatic int q16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  task automatic run_cmd(int t);
    gemm_cmd_t c;
    int nrows, k, cyc, exp_cyc, vlat, nseg;
    bit narrow;
    vop_e o = vop_e'(t % 3);
    logic [KMAX-1:0][FEAT_W-1:0] a;
    int acc [ROWS][COLS];
    nrows = (t % 5 == 0) ? ROWS : $urandom_range(1, ROWS);
    nseg  = (t >= 30) ? 2 + (t % 2) : 1;     // the later commands span several channel segments
    narrow = (o == VOP_EXP) || (t % 2 == 0);
    c = '0;
    c.nrows = 5'(nrows);
    c.out_half = 1'($urandom); c.out_base = GFB_AW'($urandom_range(500, 990));
    c.shift = (o == VOP_EXP) ? ((nseg > 1) ? 5'd16 : 5'd14) : 5'($urandom_range(8, 20));
    c.op = o;
    for (int r = 0; r < ROWS; r++)
      for (int j = 0; j < COLS; j++) acc[r][j] = 0;
    writes.delete();
    for (int sg = 0; sg < nseg; sg++) begin
      k = (t % 7 == 0) ? KMAX : $urandom_range(1, KMAX);
      c.k = 6'(k);
      c.a_half = 1'($urandom); c.a_base = GFB_AW'(sg * 100 + $urandom_range(0, 70));
      c.w_base = WB_AW'(sg * 600 + $urandom_range(0, 500));
      c.accumulate = (sg > 0);
      c.hold = (sg < nseg - 1);
      for (int r = 0; r < ROWS; r++)
        for (int kk = 0; kk < KMAX; kk++)
          gfb[c.a_half][int'(c.a_base) + r][kk] = narrow ? 16'(int'($urandom_range(0, 2048)) - 1024) : 16'($urandom);
      for (int kk = 0; kk < k; kk++)
        for (int j = 0; j < COLS; j++)
          wb[int'(c.w_base) + kk][j] = narrow ? 16'(int'($urandom_range(0, 2048)) - 1024) : 16'($urandom);
      for (int r = 0; r < nrows; r++) begin
        a = gfb[c.a_half][int'(c.a_base) + r];
        for (int j = 0; j < COLS; j++)
          for (int kk = 0; kk < k; kk++)
            acc[r][j] += int'($signed(a[kk])) * int'($signed(wb[int'(c.w_base) + kk][j]));
      end
      @(negedge clk);
      cmd = c; cmd_valid = 1;
      @(negedge clk);
      cmd_valid = 0;
      cyc = 1;
      while (!cmd_ready) begin @(negedge clk); cyc++; end
      vlat = (o == VOP_EXP) ? ITERS + 5 : 1;
      exp_cyc = (nrows + 1) + (k + ROWS + COLS + 1) + (c.hold ? 0 : nrows * (vlat + 1));
      checks++;
      if (cyc != exp_cyc) begin failures++; $display("cmd %0d.%0d: %0d cycles, expected %0d", t, sg, cyc, exp_cyc); end
    end
    checks++;
    if (writes.size() != nrows) begin failures++; $display("cmd %0d: %0d rows written, expected %0d", t, writes.size(), nrows); end
    for (int r = 0; r < nrows; r++) begin
      logic [KMAX-1:0][FEAT_W-1:0] row = gfb[c.out_half][int'(c.out_base) + r];
      for (int j = 0; j < KMAX; j++) begin
        int got = int'($signed(row[j]));
        int qv;
        checks++;
        if (j >= COLS) begin
          if (got != 0) begin failures++; $display("cmd %0d row %0d channel %0d not zero", t, r, j); end
          continue;
        end
        qv = q16(longint'(acc[r][j] >>> c.shift));
        case (o)
          VOP_NONE: if (got != qv) begin failures++; $display("cmd %0d row %0d col %0d: %0d vs %0d", t, r, j, got, qv); end
          VOP_RELU: if (got != (qv < 0 ? 0 : qv)) begin failures++; $display("cmd %0d relu row %0d col %0d", t, r, j); end
          default: begin
            real e = $exp(real'(qv) / 4096.0) * 4096.0;
            if (real'(got) - e > 3.0 || e - real'(got) > 3.0) begin
              failures++; $display("cmd %0d exp row %0d col %0d: %0d vs %f", t, r, j, got, e);
            end
          end
        endcase
      end
    end
  endtask

  initial begin
    cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 42; t++) run_cmd(t);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
