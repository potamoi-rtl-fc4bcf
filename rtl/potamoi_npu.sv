// potamoi_npu: the augmented NPU of the streaming neural-rendering SoC.
//
// It joins the baseline NPU parts (24 x 24 systolic array, weight buffer,
// double-buffered Global Feature Buffer, vector unit) with the two
// augmentations: the Gathering Unit, which performs Feature Gathering over
// one MVoxel at a time from a channel-major, bank-conflict-free feature
// table, and the exponential extension of the vector unit. A layer
// sequencer (this design's own) runs MLP tiles over the gathered features.
//
// Data flow: the DMA (outside) writes the Ray Index Table, MVoxel features
// and weights through the *_wr_* ports. The control processor (outside)
// issues gather jobs (gu_job_*) and layer commands (gemm_cmd_*). The GU
// writes one feature vector per ray sample into the Global Feature Buffer;
// layer commands read such rows, multiply them with weights on the array,
// pass the results through the vector unit (ReLU / exp / none) and write
// them back. Results are read out on the host_rd_* port.
//
// The buffer has one write port: layer write-back has priority, the GU
// waits (gfb_conflict_cycles counts those cycles). Status counters report
// the events the testbenches check: GU stalls, jobs, commands.
module potamoi_npu
  import potamoi_pkg::*;
#(
  parameter int unsigned B          = 32,
  parameter int unsigned M          = 2,
  parameter int unsigned ROWS       = 24,
  parameter int unsigned COLS       = 24,
  parameter int unsigned FIFO_DEPTH = 8,
  parameter int unsigned EXP_ITERS  = 20
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // DMA writes
  input  logic                          rit_wr_en,
  input  logic [RIT_AW-1:0]             rit_wr_addr,
  input  logic [RIT_WORD_W-1:0]         rit_wr_data,
  input  logic                          mft_wr_en,
  input  logic [MFT_AW-1:0]             mft_wr_addr,
  input  logic [B-1:0][FEAT_W-1:0]      mft_wr_data,
  input  logic                          wb_wr_en,
  input  logic [WB_AW-1:0]              wb_wr_addr,
  input  logic [COLS-1:0][FEAT_W-1:0]   wb_wr_data,
  // commands
  input  logic                          gu_job_valid,
  output logic                          gu_job_ready,
  input  gu_job_t                       gu_job,
  input  logic                          gemm_cmd_valid,
  output logic                          gemm_cmd_ready,
  input  gemm_cmd_t                     gemm_cmd,
  // read-out
  input  logic                          host_rd_en,
  input  logic                          host_rd_half,
  input  logic [GFB_AW-1:0]             host_rd_addr,
  output logic [B-1:0][FEAT_W-1:0]      host_rd_data,
  // status
  output logic                          gu_busy,
  output logic                          gemm_busy,
  output logic                          rit_fill_buf,
  output logic                          mft_fill_buf,
  output logic [31:0]                   gu_stall_cycles,
  output logic [31:0]                   gfb_conflict_cycles,
  output logic [31:0]                   gu_jobs_done,
  output logic [31:0]                   gemm_cmds_done
);
  // ---------------- Gathering Unit ----------------
  logic                        gu_out_valid, gu_out_ready, gu_out_half;
  logic [GFB_AW-1:0]           gu_out_addr;
  logic [B-1:0][FEAT_W-1:0]    gu_out_data;

  gathering_unit #(.B(B), .M(M), .FIFO_DEPTH(FIFO_DEPTH)) u_gu (
    .clk         (clk),
    .rst_n       (rst_n),
    .job_valid   (gu_job_valid),
    .job_ready   (gu_job_ready),
    .job         (gu_job),
    .rit_wr_en   (rit_wr_en),
    .rit_wr_addr (rit_wr_addr),
    .rit_wr_data (rit_wr_data),
    .mft_wr_en   (mft_wr_en),
    .mft_wr_addr (mft_wr_addr),
    .mft_wr_data (mft_wr_data),
    .out_valid   (gu_out_valid),
    .out_ready   (gu_out_ready),
    .out_half    (gu_out_half),
    .out_addr    (gu_out_addr),
    .out_data    (gu_out_data),
    .busy        (gu_busy),
    .rit_fill_buf(rit_fill_buf),
    .mft_fill_buf(mft_fill_buf),
    .stall_cycles(gu_stall_cycles)
  );

  // ---------------- layer sequencer ----------------
  logic                          g_rd_en, g_rd_half, wb_rd_en;
  logic [GFB_AW-1:0]             g_rd_addr;
  logic [B-1:0][FEAT_W-1:0]      g_rd_data;
  logic [WB_AW-1:0]              wb_rd_addr;
  logic [COLS-1:0][FEAT_W-1:0]   wb_rd_data;
  logic                          sa_clear, sa_en;
  logic [ROWS-1:0][FEAT_W-1:0]   sa_a;
  logic [COLS-1:0][FEAT_W-1:0]   sa_b;
  logic [$clog2(ROWS)-1:0]       sa_rd_row;
  logic [COLS-1:0][ACC_W-1:0]    sa_rd_data;
  logic                          vu_start, vu_done, vu_busy;
  vop_e                          vu_op;
  logic [4:0]                    vu_shift;
  logic [COLS-1:0][FEAT_W-1:0]   vu_res;
  logic                          c_wr_en, c_wr_half;
  logic [GFB_AW-1:0]             c_wr_addr;
  logic [B-1:0][FEAT_W-1:0]      c_wr_data;

  gemm_controller #(.ROWS(ROWS), .COLS(COLS), .KMAX(B)) u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .cmd_valid  (gemm_cmd_valid),
    .cmd_ready  (gemm_cmd_ready),
    .cmd        (gemm_cmd),
    .gfb_rd_en  (g_rd_en),
    .gfb_rd_half(g_rd_half),
    .gfb_rd_addr(g_rd_addr),
    .gfb_rd_data(g_rd_data),
    .wb_rd_en   (wb_rd_en),
    .wb_rd_addr (wb_rd_addr),
    .wb_rd_data (wb_rd_data),
    .sa_clear   (sa_clear),
    .sa_en      (sa_en),
    .sa_a       (sa_a),
    .sa_b       (sa_b),
    .sa_rd_row  (sa_rd_row),
    .vu_start   (vu_start),
    .vu_op      (vu_op),
    .vu_shift   (vu_shift),
    .vu_done    (vu_done),
    .vu_res     (vu_res),
    .wr_en      (c_wr_en),
    .wr_half    (c_wr_half),
    .wr_addr    (c_wr_addr),
    .wr_data    (c_wr_data),
    .busy       (gemm_busy)
  );

  systolic_array #(.ROWS(ROWS), .COLS(COLS), .DATA_W(FEAT_W), .ACC_W(ACC_W)) u_sa (
    .clk    (clk),
    .rst_n  (rst_n),
    .clear  (sa_clear),
    .en     (sa_en),
    .a_in   (sa_a),
    .b_in   (sa_b),
    .rd_row (sa_rd_row),
    .rd_data(sa_rd_data)
  );

  vector_unit #(.LANES(COLS), .ITERS(EXP_ITERS)) u_vu (
    .clk   (clk),
    .rst_n (rst_n),
    .start (vu_start),
    .op    (vu_op),
    .shift (vu_shift),
    .acc_in(sa_rd_data),
    .busy  (vu_busy),
    .done  (vu_done),
    .res   (vu_res)
  );

  weight_buffer #(.WIDTH(COLS * FEAT_W), .DEPTH(1 << WB_AW)) u_wb (
    .clk    (clk),
    .wr_en  (wb_wr_en),
    .wr_addr(wb_wr_addr),
    .wr_data(wb_wr_data),
    .rd_en  (wb_rd_en),
    .rd_addr(wb_rd_addr),
    .rd_data(wb_rd_data)
  );

  // ---------------- Global Feature Buffer and its write arbitration ----------------
  logic                     gfb_wr_en, gfb_wr_half;
  logic [GFB_AW-1:0]        gfb_wr_addr;
  logic [B-1:0][FEAT_W-1:0] gfb_wr_data;

  assign gu_out_ready = !c_wr_en;
  always_comb begin
    if (c_wr_en) begin
      gfb_wr_en   = 1'b1;
      gfb_wr_half = c_wr_half;
      gfb_wr_addr = c_wr_addr;
      gfb_wr_data = c_wr_data;
    end else begin
      gfb_wr_en   = gu_out_valid;
      gfb_wr_half = gu_out_half;
      gfb_wr_addr = gu_out_addr;
      gfb_wr_data = gu_out_data;
    end
  end

  global_feature_buffer #(.ROW_W(B * FEAT_W), .BLOCK_ROWS(512), .BLOCKS(48), .AW(GFB_AW)) u_gfb (
    .clk     (clk),
    .wr_en   (gfb_wr_en),
    .wr_half (gfb_wr_half),
    .wr_addr (gfb_wr_addr),
    .wr_data (gfb_wr_data),
    .rd_en   (g_rd_en),
    .rd_half (g_rd_half),
    .rd_addr (g_rd_addr),
    .rd_data (g_rd_data),
    .hrd_en  (host_rd_en),
    .hrd_half(host_rd_half),
    .hrd_addr(host_rd_addr),
    .hrd_data(host_rd_data)
  );

  // ---------------- status counters ----------------
  logic gu_busy_q, gemm_busy_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gfb_conflict_cycles <= '0;
      gu_jobs_done        <= '0;
      gemm_cmds_done      <= '0;
      gu_busy_q           <= 1'b0;
      gemm_busy_q         <= 1'b0;
    end else begin
      gu_busy_q   <= gu_busy;
      gemm_busy_q <= gemm_busy;
      if (c_wr_en && gu_out_valid) gfb_conflict_cycles <= gfb_conflict_cycles + 1'b1;
      if (gu_busy_q && !gu_busy)     gu_jobs_done   <= gu_jobs_done + 1'b1;
      if (gemm_busy_q && !gemm_busy) gemm_cmds_done <= gemm_cmds_done + 1'b1;
    end
  end
endmodule
