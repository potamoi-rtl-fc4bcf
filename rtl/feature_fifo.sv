// feature_fifo: one of the M Feature FIFOs at the output of the Gathering
// Unit's reducers. It holds finished feature vectors (with their destination
// row) until the Global Feature Buffer write port takes them.
//
// First-word-fall-through: dout shows the oldest entry whenever empty is low;
// pop removes it. push and pop may happen in the same cycle. count is the
// occupancy, used upstream to stall issue before the FIFO can overflow.
// Depth is this design's choice (the paper gives none).
module feature_fifo #(
  parameter int unsigned WIDTH = 527,
  parameter int unsigned DEPTH = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [WIDTH-1:0]           din,
  input  logic                       pop,
  output logic [WIDTH-1:0]           dout,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    rd_ptr, wr_ptr;

  assign empty = (count == '0);
  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign dout  = mem[rd_ptr];

  logic do_push, do_pop;
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= (wr_ptr == PW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= (rd_ptr == PW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + ($bits(count))'(do_push) - ($bits(count))'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= din;
  end

  // handshake rules
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full)
    else $error("feature_fifo: push while full");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty)
    else $error("feature_fifo: pop while empty");
endmodule
