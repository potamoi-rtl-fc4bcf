// global_feature_buffer: the NPU's double-buffered feature/activation SRAM
// (1.5 MB built from 32 KB blocks in the paper).
//
// A row is one 32-channel feature vector of 16-bit values (512 bits), so a
// 32 KB block holds 512 rows and the 48 blocks form two halves of 24 blocks
// (12288 rows) each. One half is filled (by the Gathering Unit or by layer
// results) while the other is read by the systolic-array sequencer; which
// half each access uses is given with the access, so the controller decides
// when to swap. Ports: one write port, one read port for the array
// sequencer, one read port for read-out to the host side. Reads are
// registered (data one cycle after the enable). Row width and port count are
// this design's choices; capacity and block granularity are the paper's.
module global_feature_buffer #(
  parameter int unsigned ROW_W      = 512,
  parameter int unsigned BLOCK_ROWS = 512,
  parameter int unsigned BLOCKS     = 48,
  parameter int unsigned AW         = 14
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic              wr_half,
  input  logic [AW-1:0]     wr_addr,
  input  logic [ROW_W-1:0]  wr_data,
  input  logic              rd_en,
  input  logic              rd_half,
  input  logic [AW-1:0]     rd_addr,
  output logic [ROW_W-1:0]  rd_data,
  input  logic              hrd_en,
  input  logic              hrd_half,
  input  logic [AW-1:0]     hrd_addr,
  output logic [ROW_W-1:0]  hrd_data
);
  localparam int unsigned HALF_ROWS = (BLOCKS / 2) * BLOCK_ROWS;
  localparam int unsigned IW        = $clog2(2 * HALF_ROWS);

  logic [ROW_W-1:0] mem [2 * HALF_ROWS];

  function automatic logic [IW-1:0] idx(logic half, logic [AW-1:0] a);
    return half ? IW'(HALF_ROWS) + IW'(a) : IW'(a);
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en)  mem[idx(wr_half, wr_addr)] <= wr_data;
    if (rd_en)  rd_data  <= mem[idx(rd_half, rd_addr)];
    if (hrd_en) hrd_data <= mem[idx(hrd_half, hrd_addr)];
  end

  // row addresses must stay inside one half
  a_wr_range: assert property (@(posedge clk) wr_en |-> wr_addr < AW'(HALF_ROWS))
    else $error("GFB write row %0d out of range", wr_addr);
  a_rd_range: assert property (@(posedge clk) rd_en |-> rd_addr < AW'(HALF_ROWS))
    else $error("GFB read row %0d out of range", rd_addr);
  a_hrd_range: assert property (@(posedge clk) hrd_en |-> hrd_addr < AW'(HALF_ROWS))
    else $error("GFB host read row %0d out of range", hrd_addr);
endmodule
