// weight_buffer: the NPU's dedicated MLP weight SRAM (96 KB in the paper).
//
// One row holds one weight for each of the 24 systolic-array columns
// (24 x 16 bit = 384 bits), so the array reads one row of B per step; 96 KB
// gives 2048 rows. The DMA writes rows through the write port; the layer
// sequencer reads through a registered read port (data one cycle after
// rd_en). The row width and port structure are this design's choices; the
// capacity is the paper's. Written as an array; a real chip would use an
// SRAM macro.
module weight_buffer #(
  parameter int unsigned WIDTH = 384,
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
