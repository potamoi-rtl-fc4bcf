// sa_pe: one processing element of the output-stationary systolic array.
//
// Follows the paper's PE description: two 16-bit input registers, a 16-bit
// fixed-point multiplier-accumulator and a 32-bit accumulator register.
// Each enabled cycle the PE adds a_in * b_in (signed) to its accumulator and
// latches a_in and b_in, which it hands to its right and lower neighbours in
// the next cycle. clear zeroes the accumulator and both input registers.
module sa_pe #(
  parameter int unsigned DATA_W = 16,
  parameter int unsigned ACC_W  = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     en,
  input  logic signed [DATA_W-1:0] a_in,
  input  logic signed [DATA_W-1:0] b_in,
  output logic signed [DATA_W-1:0] a_out,
  output logic signed [DATA_W-1:0] b_out,
  output logic signed [ACC_W-1:0]  acc
);
  logic signed [2*DATA_W-1:0] prod;
  assign prod = a_in * b_in;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out <= '0;
      b_out <= '0;
      acc   <= '0;
    end else if (clear) begin
      a_out <= '0;
      b_out <= '0;
      acc   <= '0;
    end else if (en) begin
      a_out <= a_in;
      b_out <= b_in;
      acc   <= acc + ACC_W'(prod);
    end
  end
endmodule
