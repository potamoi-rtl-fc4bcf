// gemm_controller: sequences one MLP layer tile of Feature Computation
// through the systolic array and the vector unit.
//
// A command (gemm_cmd_t) names up to 24 input rows of the Global Feature
// Buffer (one ray sample each, k <= 32 channels), k weight rows of the
// weight buffer (24 output neurons each), the destination rows, the
// requantisation shift and the vector-unit operation. Phases:
//   LOAD   read the nrows input rows into a local tile (nrows + 1 cycles);
//   FEED   for kk = 0..k-1 apply channel kk of every tile row on the array's
//          A inputs and weight row w_base + kk on its B inputs, then zeros
//          until the skewed wavefront has left the array
//          (k + ROWS + COLS cycles in total);
//   DRAIN  for every row r: hand the 24 accumulators to the vector unit,
//          wait for it, and write the 24 results into row out_base + r
//          (upper channels of the 512-bit row are zero).
// Features wider than 32 channels are stored as channel segments in
// separate rows; a layer over them is one command per segment: accumulate
// keeps the array's sums instead of clearing them on accept, hold ends the
// command after FEED without DRAIN, so the next segment adds onto the sums.
// The result write has priority on the buffer's single write port, so it
// is a plain strobe without a ready. wr_data is the vector unit's result
// passed straight through (the sequencer only adds address and strobe) and
// its channels 24..31 are constant zero: a GFB row has 32 channels, a layer
// tile 24 outputs.
//
// The paper does not describe the NPU's own control; this sequencer is this
// design's, the simplest one that runs a layer over the blocks it names.
module gemm_controller
  import potamoi_pkg::*;
#(
  parameter int unsigned ROWS = 24,
  parameter int unsigned COLS = 24,
  parameter int unsigned KMAX = 32
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               cmd_valid,
  output logic                               cmd_ready,
  input  gemm_cmd_t                          cmd,
  // Global Feature Buffer read port
  output logic                               gfb_rd_en,
  output logic                               gfb_rd_half,
  output logic [GFB_AW-1:0]                  gfb_rd_addr,
  input  logic [KMAX-1:0][FEAT_W-1:0]        gfb_rd_data,
  // weight buffer read port
  output logic                               wb_rd_en,
  output logic [WB_AW-1:0]                   wb_rd_addr,
  input  logic [COLS-1:0][FEAT_W-1:0]        wb_rd_data,
  // systolic array
  output logic                               sa_clear,
  output logic                               sa_en,
  output logic [ROWS-1:0][FEAT_W-1:0]        sa_a,
  output logic [COLS-1:0][FEAT_W-1:0]        sa_b,
  output logic [$clog2(ROWS)-1:0]            sa_rd_row,
  // vector unit
  output logic                               vu_start,
  output vop_e                               vu_op,
  output logic [4:0]                         vu_shift,
  input  logic                               vu_done,
  input  logic [COLS-1:0][FEAT_W-1:0]        vu_res,
  // result write
  output logic                               wr_en,
  output logic                               wr_half,
  output logic [GFB_AW-1:0]                  wr_addr,
  output logic [KMAX-1:0][FEAT_W-1:0]        wr_data,
  output logic                               busy
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_FEED, S_DRAIN_GO, S_DRAIN_WAIT} state_e;

  localparam int unsigned FEED_STEPS = KMAX + ROWS + COLS;   // upper bound on step counter
  localparam int unsigned SW = $clog2(FEED_STEPS + 2);

  state_e                         state;
  gemm_cmd_t                      c;
  logic [KMAX-1:0][FEAT_W-1:0]    tile [ROWS];
  logic [4:0]                     ld_cnt;       // rows requested
  logic                           ld_v;         // read data valid this cycle
  logic [4:0]                     ld_row;       // row the data belongs to
  logic [SW-1:0]                  step;
  logic                           fd_v;         // weight data valid this cycle
  logic [5:0]                     fd_k;         // channel of that weight row
  logic [4:0]                     dr_row;

  assign busy      = (state != S_IDLE);
  assign cmd_ready = (state == S_IDLE);
  assign vu_op     = c.op;
  assign vu_shift  = c.shift;
  assign sa_rd_row = ($clog2(ROWS))'(dr_row);

  // read requests
  always_comb begin
    gfb_rd_en   = (state == S_LOAD) && (ld_cnt < c.nrows);
    gfb_rd_half = c.a_half;
    gfb_rd_addr = c.a_base + GFB_AW'(ld_cnt);
    wb_rd_en    = (state == S_FEED) && (SW'(step) < SW'(c.k));
    wb_rd_addr  = c.w_base + WB_AW'(step);
  end

  // array operands
  always_comb begin
    sa_clear = (state == S_IDLE) && cmd_valid && !cmd.accumulate;
    sa_en    = (state == S_FEED);
    for (int i = 0; i < ROWS; i++) sa_a[i] = fd_v ? tile[i][fd_k[4:0]] : '0;
    sa_b = fd_v ? wb_rd_data : '0;
  end

  assign vu_start = (state == S_DRAIN_GO);
  always_comb begin
    wr_en   = (state == S_DRAIN_WAIT) && vu_done;
    wr_half = c.out_half;
    wr_addr = c.out_base + GFB_AW'(dr_row);
    wr_data = '0;
    for (int j = 0; j < COLS; j++) wr_data[j] = vu_res[j];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      c      <= '0;
      ld_cnt <= '0;
      ld_v   <= 1'b0;
      ld_row <= '0;
      step   <= '0;
      fd_v   <= 1'b0;
      fd_k   <= '0;
      dr_row <= '0;
      for (int i = 0; i < ROWS; i++) tile[i] <= '0;
    end else begin
      ld_v   <= gfb_rd_en;
      ld_row <= ld_cnt;
      fd_v   <= wb_rd_en;
      fd_k   <= 6'(step);
      if (ld_v) tile[ld_row] <= gfb_rd_data;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          c      <= cmd;
          ld_cnt <= '0;
          state  <= S_LOAD;
          for (int i = 0; i < ROWS; i++) tile[i] <= '0;
        end
        S_LOAD: begin
          if (ld_cnt < c.nrows) ld_cnt <= ld_cnt + 1'b1;
          else begin
            // the last row's data is written this cycle
            state <= S_FEED;
            step  <= '0;
          end
        end
        S_FEED: begin
          step <= step + 1'b1;
          if (step == SW'(c.k) + SW'(ROWS + COLS - 1)) begin
            state  <= c.hold ? S_IDLE : S_DRAIN_GO;
            dr_row <= '0;
          end
        end
        S_DRAIN_GO: state <= S_DRAIN_WAIT;
        S_DRAIN_WAIT: if (vu_done) begin
          if (dr_row + 1'b1 == c.nrows) state <= S_IDLE;
          else begin
            dr_row <= dr_row + 1'b1;
            state  <= S_DRAIN_GO;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_cmd_legal: assert property (@(posedge clk) disable iff (!rst_n)
      (cmd_valid && cmd_ready) |-> (cmd.nrows >= 1 && cmd.nrows <= 5'(ROWS) && cmd.k >= 1 && cmd.k <= 6'(KMAX)))
    else $error("gemm_controller: illegal command");
endmodule
