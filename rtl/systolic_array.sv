// systolic_array: ROWS x COLS output-stationary MAC array (24 x 24 in the
// paper) that executes Feature Computation, C = A x B.
//
// Every enabled step the caller applies column k of A (one value per array
// row) on a_in and row k of B (one value per array column) on b_in. Inside
// the array, row i of A is delayed by i steps and column j of B by j steps
// (skew registers), so A[i][k] and B[k][j] meet in PE (i,j) at step
// k + i + j. A values travel right, B values travel down, each PE keeps its
// own 32-bit sum C[i][j]. After the last column the caller applies zeros for
// ROWS + COLS - 2 further steps; then every accumulator is complete and
// row r can be read on rd_data by setting rd_row = r (combinational read).
//
// The PE structure and the array size follow the paper; the paper also says
// the MACs mimic the TPU's, whose dataflow is weight-stationary. This design
// keeps the accumulator inside the PE as the PE description states, i.e. an
// output-stationary dataflow. Skewing and the read-out mux are this design's.
module systolic_array #(
  parameter int unsigned ROWS   = 24,
  parameter int unsigned COLS   = 24,
  parameter int unsigned DATA_W = 16,
  parameter int unsigned ACC_W  = 32
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              clear,
  input  logic                              en,
  input  logic [ROWS-1:0][DATA_W-1:0]       a_in,
  input  logic [COLS-1:0][DATA_W-1:0]       b_in,
  input  logic [$clog2(ROWS)-1:0]           rd_row,
  output logic [COLS-1:0][ACC_W-1:0]        rd_data
);
  // a_h[i][j]: A value entering PE (i,j) from the left
  // b_v[i][j]: B value entering PE (i,j) from above
  logic signed [DATA_W-1:0] a_h [ROWS][COLS+1];
  logic signed [DATA_W-1:0] b_v [ROWS+1][COLS];
  logic signed [ACC_W-1:0]  acc [ROWS][COLS];

  // input skew: row i delayed by i steps
  for (genvar i = 0; i < ROWS; i++) begin : g_askew
    if (i == 0) begin : g_direct
      assign a_h[0][0] = a_in[0];
    end else begin : g_delay
      logic [DATA_W-1:0] dl [i];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int d = 0; d < i; d++) dl[d] <= '0;
        end else if (clear) begin
          for (int d = 0; d < i; d++) dl[d] <= '0;
        end else if (en) begin
          dl[0] <= a_in[i];
          for (int d = 1; d < i; d++) dl[d] <= dl[d-1];
        end
      end
      assign a_h[i][0] = dl[i-1];
    end
  end

  // input skew: column j delayed by j steps
  for (genvar j = 0; j < COLS; j++) begin : g_bskew
    if (j == 0) begin : g_direct
      assign b_v[0][0] = b_in[0];
    end else begin : g_delay
      logic [DATA_W-1:0] dl [j];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int d = 0; d < j; d++) dl[d] <= '0;
        end else if (clear) begin
          for (int d = 0; d < j; d++) dl[d] <= '0;
        end else if (en) begin
          dl[0] <= b_in[j];
          for (int d = 1; d < j; d++) dl[d] <= dl[d-1];
        end
      end
      assign b_v[0][j] = dl[j-1];
    end
  end

  for (genvar i = 0; i < ROWS; i++) begin : g_row
    for (genvar j = 0; j < COLS; j++) begin : g_col
      sa_pe #(.DATA_W(DATA_W), .ACC_W(ACC_W)) u_pe (
        .clk  (clk),
        .rst_n(rst_n),
        .clear(clear),
        .en   (en),
        .a_in (a_h[i][j]),
        .b_in (b_v[i][j]),
        .a_out(a_h[i][j+1]),
        .b_out(b_v[i+1][j]),
        .acc  (acc[i][j])
      );
    end
  end

  always_comb begin
    for (int j = 0; j < COLS; j++) rd_data[j] = acc[rd_row][j];
  end

endmodule
