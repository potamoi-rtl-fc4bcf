// mft_bank: one SRAM array of the MVoxel Feature Table. It stores one
// channel of every point of an MVoxel, for both halves of the double buffer
// (address = {buffer, point}). One write port for the DMA and NPORTS
// registered read ports (M = 2 in the paper), so that NPORTS ray samples can
// read their point in the same cycle. No crossbar sits in front of it: with
// the channel-major layout every bank serves exactly one channel.
module mft_bank #(
  parameter int unsigned WIDTH  = 16,
  parameter int unsigned DEPTH  = 512,
  parameter int unsigned NPORTS = 2,
  parameter int unsigned AW     = $clog2(DEPTH)
) (
  input  logic                          clk,
  input  logic                          wr_en,
  input  logic [AW:0]                   wr_addr,
  input  logic [WIDTH-1:0]              wr_data,
  input  logic [NPORTS-1:0]             rd_en,
  input  logic [NPORTS-1:0][AW:0]       rd_addr,
  output logic [NPORTS-1:0][WIDTH-1:0]  rd_data
);
  logic [WIDTH-1:0] mem [2 * DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    for (int p = 0; p < NPORTS; p++)
      if (rd_en[p]) rd_data[p] <= mem[rd_addr[p]];
  end
endmodule
