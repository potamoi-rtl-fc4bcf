// mvoxel_feature_table: the double-buffered MVoxel Feature Table (MFT) of
// the Gathering Unit, 32 KB per buffer in the paper.
//
// Channel-major layout (the paper's bank-conflict-free interleaving): bank b
// holds channel b of all points of the MVoxel, so reading one point means
// reading the same row in all B banks, and M ray samples can read M
// different points in the same cycle through the M ports of every bank.
// Different channels never compete for a bank, and different ray samples use
// different ports, so a read never waits. B = 32 banks x 512 points x 16 bit
// = 32 KB per buffer.
//
// Interface: the DMA writes one point (all B channels) per cycle into buffer
// wr_buf; channel b goes to bank b. Port m reads point rd_addr[m] of buffer
// rd_buf; rd_data[m][b] (channel b) is valid the cycle after rd_en[m].
// Writing a whole point per DMA beat is this design's choice.
module mvoxel_feature_table
  import potamoi_pkg::*;
#(
  parameter int unsigned B     = 32,
  parameter int unsigned M     = 2,
  parameter int unsigned DEPTH = 512
) (
  input  logic                                  clk,
  input  logic                                  wr_en,
  input  logic                                  wr_buf,
  input  logic [$clog2(DEPTH)-1:0]              wr_addr,
  input  logic [B-1:0][FEAT_W-1:0]              wr_data,
  input  logic                                  rd_buf,
  input  logic [M-1:0]                          rd_en,
  input  logic [M-1:0][$clog2(DEPTH)-1:0]       rd_addr,
  output logic [M-1:0][B-1:0][FEAT_W-1:0]       rd_data
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [M-1:0][AW:0] bank_rd_addr;
  for (genvar m = 0; m < M; m++) begin : g_addr
    assign bank_rd_addr[m] = {rd_buf, rd_addr[m]};
  end

  for (genvar b = 0; b < B; b++) begin : g_bank
    logic [M-1:0][FEAT_W-1:0] q;
    mft_bank #(.WIDTH(FEAT_W), .DEPTH(DEPTH), .NPORTS(M)) u_bank (
      .clk    (clk),
      .wr_en  (wr_en),
      .wr_addr({wr_buf, wr_addr}),
      .wr_data(wr_data[b]),
      .rd_en  (rd_en),
      .rd_addr(bank_rd_addr),
      .rd_data(q)
    );
    for (genvar m = 0; m < M; m++) begin : g_port
      assign rd_data[m][b] = q[m];
    end
  end
endmodule
