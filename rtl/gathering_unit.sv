// gathering_unit: the Gathering Unit (GU) added to the NPU. It executes
// Feature Gathering in memory-centric order: one job per MVoxel.
//
// Blocks: a double-buffered Ray Index Table (rit_buffer), a double-buffered
// MVoxel Feature Table in channel-major layout (mvoxel_feature_table, B banks
// with M ports), the address generator, B x M reducers and M Feature FIFOs.
//
// Operation. The DMA streams the RIT of the next MVoxel and the MVoxel's
// features into the fill halves. A job (gu_job_t) is accepted when the
// address generator is idle; at that moment the fill and work halves swap
// (the RIT keeps its halves when keep_rit is set, for the next channel
// segment of the same MVoxel), so the DMA can load the following MVoxel
// while this one is processed. Per cycle and port the address generator
// reads one point of the MFT (all B channels at once, no bank conflicts);
// reducer (m, b) interpolates channel b of the sample on port m; after the
// last vertex the M finished vectors go into the M FIFOs together with their
// destination row out_base + sample index. A round-robin arbiter drains the
// FIFOs into the single Global Feature Buffer write port (out_valid/out_ready).
// Issue stalls while a FIFO could overflow; stall_cycles counts those cycles.
//
// Pipeline: issue (RIT data -> MFT address) -> MFT read -> reducer -> FIFO,
// so a result enters its FIFO two cycles after its last vertex is issued.
// The swap-on-accept policy, keep_rit, the arbiter and the FIFO depth are
// this design's choices; the blocks and their sizes follow the paper.
module gathering_unit
  import potamoi_pkg::*;
#(
  parameter int unsigned B          = 32,
  parameter int unsigned M          = 2,
  parameter int unsigned FIFO_DEPTH = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // job from the controller
  input  logic                         job_valid,
  output logic                         job_ready,
  input  gu_job_t                      job,
  // DMA into the RIT fill buffer
  input  logic                         rit_wr_en,
  input  logic [RIT_AW-1:0]            rit_wr_addr,
  input  logic [RIT_WORD_W-1:0]        rit_wr_data,
  // DMA into the MFT fill buffer
  input  logic                         mft_wr_en,
  input  logic [MFT_AW-1:0]            mft_wr_addr,
  input  logic [B-1:0][FEAT_W-1:0]     mft_wr_data,
  // results to the Global Feature Buffer
  output logic                         out_valid,
  input  logic                         out_ready,
  output logic                         out_half,
  output logic [GFB_AW-1:0]            out_addr,
  output logic [B-1:0][FEAT_W-1:0]     out_data,
  // status
  output logic                         busy,
  output logic                         rit_fill_buf,
  output logic                         mft_fill_buf,
  output logic [31:0]                  stall_cycles
);
  localparam int unsigned FW = 1 + GFB_AW + B * FEAT_W;
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  // ---------------- double-buffer select ----------------
  logic rit_work, mft_work;
  logic accept;
  assign accept    = job_valid && job_ready;
  assign rit_work  = ~rit_fill_buf;
  assign mft_work  = ~mft_fill_buf;

  logic           out_half_r;
  logic [GFB_AW-1:0] out_base_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rit_fill_buf <= 1'b0;
      mft_fill_buf <= 1'b0;
      out_half_r   <= 1'b0;
      out_base_r   <= '0;
    end else if (accept) begin
      mft_fill_buf <= ~mft_fill_buf;
      if (!job.keep_rit) rit_fill_buf <= ~rit_fill_buf;
      out_half_r <= job.out_half;
      out_base_r <= job.out_base;
    end
  end

  // ---------------- RIT and address generation ----------------
  logic [M-1:0][RIT_ROW_AW-1:0]  rit_row;
  logic [M-1:0][RIT_ENTRY_W-1:0] rit_data;
  logic                          ag_busy, ag_done, stall;
  logic [M-1:0]                  iss_valid, iss_first, iss_last, iss_skip;
  logic [M-1:0][MFT_AW-1:0]      iss_addr;
  logic [M-1:0][FEAT_W-1:0]      iss_w;
  logic [M-1:0][CNT_W-1:0]       iss_id;

  assign job_ready = !ag_busy;

  rit_buffer #(.ENTRIES(RIT_ENTRIES), .RD_PORTS(M)) u_rit (
    .clk    (clk),
    .wr_en  (rit_wr_en),
    .wr_buf (rit_fill_buf),
    .wr_addr(rit_wr_addr),
    .wr_data(rit_wr_data),
    .rd_buf (rit_work),
    .rd_row (rit_row),
    .rd_data(rit_data)
  );

  address_generation #(.M(M), .NVERT(VERTS)) u_ag (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (accept),
    .mode     (job.mode),
    .count    (job.count),
    .base     (job.base),
    .stall    (stall),
    .rit_row  (rit_row),
    .rit_data (rit_data),
    .iss_valid(iss_valid),
    .iss_addr (iss_addr),
    .iss_w    (iss_w),
    .iss_first(iss_first),
    .iss_last (iss_last),
    .iss_skip (iss_skip),
    .iss_id   (iss_id),
    .busy     (ag_busy),
    .done     (ag_done)
  );

  // ---------------- MFT ----------------
  logic [M-1:0][B-1:0][FEAT_W-1:0] mft_q;

  mvoxel_feature_table #(.B(B), .M(M), .DEPTH(MFT_DEPTH)) u_mft (
    .clk    (clk),
    .wr_en  (mft_wr_en),
    .wr_buf (mft_fill_buf),
    .wr_addr(mft_wr_addr),
    .wr_data(mft_wr_data),
    .rd_buf (mft_work),
    .rd_en  (iss_valid),
    .rd_addr(iss_addr),
    .rd_data(mft_q)
  );

  // control delayed to line up with the MFT read data
  logic [M-1:0]              d_valid, d_first, d_last, d_skip;
  logic [M-1:0][FEAT_W-1:0]  d_w;
  logic [M-1:0][GFB_AW-1:0]  d_row, r_row;
  logic                      d_half, r_half;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_valid <= '0;
      d_first <= '0;
      d_last  <= '0;
      d_skip  <= '0;
      d_w     <= '0;
      d_row   <= '0;
      r_row   <= '0;
      d_half  <= 1'b0;
      r_half  <= 1'b0;
    end else begin
      d_valid <= iss_valid;
      d_first <= iss_first;
      d_last  <= iss_last;
      d_skip  <= iss_skip;
      d_w     <= iss_w;
      for (int m = 0; m < M; m++) d_row[m] <= out_base_r + GFB_AW'(iss_id[m]);
      r_row   <= d_row;
      d_half  <= out_half_r;
      r_half  <= d_half;
    end
  end

  // ---------------- reducers: B x M ----------------
  logic [M-1:0][B-1:0]              red_valid;
  logic [M-1:0][B-1:0][FEAT_W-1:0]  red_feat;

  for (genvar m = 0; m < M; m++) begin : g_port
    for (genvar b = 0; b < B; b++) begin : g_red
      reducer #(.DATA_W(FEAT_W), .ACC_W(ACC_W), .W_FRAC(W_FRAC)) u_red (
        .clk      (clk),
        .rst_n    (rst_n),
        .in_valid (d_valid[m]),
        .in_first (d_first[m]),
        .in_last  (d_last[m]),
        .in_skip  (d_skip[m]),
        .in_feat  (mft_q[m][b]),
        .in_w     (d_w[m]),
        .out_valid(red_valid[m][b]),
        .out_feat (red_feat[m][b])
      );
    end
  end

  // ---------------- Feature FIFOs and drain arbiter ----------------
  logic [M-1:0]          f_empty, f_full, f_pop;
  logic [M-1:0][CW-1:0]  f_count;
  logic [M-1:0][FW-1:0]  f_dout;
  logic                  rr;           // port served next when both wait

  for (genvar m = 0; m < M; m++) begin : g_fifo
    feature_fifo #(.WIDTH(FW), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk  (clk),
      .rst_n(rst_n),
      .push (red_valid[m][0]),
      .din  ({r_half, r_row[m], red_feat[m]}),
      .pop  (f_pop[m]),
      .dout (f_dout[m]),
      .empty(f_empty[m]),
      .full (f_full[m]),
      .count(f_count[m])
    );
  end

  // stall when fewer than three free places remain: two results may be in flight
  always_comb begin
    stall = 1'b0;
    for (int m = 0; m < M; m++)
      if (f_count[m] >= CW'(FIFO_DEPTH - 2)) stall = 1'b1;
  end

  logic [$clog2(M > 1 ? M : 2)-1:0] sel;
  always_comb begin
    sel   = '0;
    f_pop = '0;
    // two-way round robin (M = 2); for larger M the lowest waiting port wins
    if (M == 2 && !f_empty[rr]) sel = rr;
    else begin
      for (int m = M - 1; m >= 0; m--)
        if (!f_empty[m]) sel = ($bits(sel))'(m);
    end
    out_valid = !(&f_empty);
    if (out_valid && out_ready) f_pop[sel] = 1'b1;
  end

  assign {out_half, out_addr, out_data} = f_dout[sel];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr           <= 1'b0;
      stall_cycles <= '0;
    end else begin
      if (out_valid && out_ready) rr <= ~sel[0];
      if (ag_busy && stall) stall_cycles <= stall_cycles + 1'b1;
    end
  end

  assign busy = ag_busy || (|d_valid) || (|red_valid) || !(&f_empty);

endmodule
