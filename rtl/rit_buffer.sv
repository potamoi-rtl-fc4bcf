// rit_buffer: the double-buffered Ray Index Table of the Gathering Unit
// (two buffers of 6 KB in the paper).
//
// Each buffer holds 128 entries. An entry is six 64-bit words: entry n
// (counting from 0) occupies word addresses 6n .. 6n+5, so the first entry
// starts at 0x000 and the last at 0x2FA, as in the paper's figure. A
// structured-representation entry is one ray sample: eight 48-bit slots,
// slot k = entry bits [48k+47:48k] = {VID[31:0], W[15:0]} (vertex id and
// trilinear weight). An unstructured entry row holds twelve 32-bit Gaussian
// point ids, PID j = bits [32j+31:32j]; 128 rows x 12 = 1536 ids. The field
// split is this design's choice; the sizes are the paper's.
//
// The DMA writes single 64-bit words into buffer wr_buf. The address
// generator reads whole 384-bit entries from buffer rd_buf through RD_PORTS
// registered read ports (data one cycle after the row is presented).
module rit_buffer
  import potamoi_pkg::*;
#(
  parameter int unsigned ENTRIES  = 128,
  parameter int unsigned RD_PORTS = 2
) (
  input  logic                                 clk,
  input  logic                                 wr_en,
  input  logic                                 wr_buf,
  input  logic [RIT_AW-1:0]                    wr_addr,
  input  logic [RIT_WORD_W-1:0]                wr_data,
  input  logic                                 rd_buf,
  input  logic [RD_PORTS-1:0][RIT_ROW_AW-1:0]  rd_row,
  output logic [RD_PORTS-1:0][RIT_ENTRY_W-1:0] rd_data
);
  logic [RIT_ENTRY_W-1:0] mem [2][ENTRIES];

  logic [RIT_ROW_AW-1:0] wr_row;
  logic [2:0]            wr_word;
  assign wr_row  = RIT_ROW_AW'(wr_addr / RIT_AW'(RIT_WPE));
  assign wr_word = 3'(wr_addr % RIT_AW'(RIT_WPE));

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_buf][wr_row][wr_word*RIT_WORD_W +: RIT_WORD_W] <= wr_data;
    for (int p = 0; p < RD_PORTS; p++) rd_data[p] <= mem[rd_buf][rd_row[p]];
  end
endmodule
