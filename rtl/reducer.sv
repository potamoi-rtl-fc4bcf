// reducer: one of the B x M reducers of the Gathering Unit. It produces one
// channel of one ray sample's feature.
//
// Structured representations (trilinear interpolation): the eight vertex
// values of the channel arrive on eight consecutive valid cycles, first with
// in_first, the eighth with in_last, each with its weight in_w (unsigned
// Q1.15, broadcast from the address generator). The reducer sums
// in_w * in_feat in a 32-bit accumulator and on in_last outputs the sum
// shifted right by 15 and saturated to 16 bits. Unstructured representations
// (3D Gaussians): in_skip bypasses the reduction and the single value is
// passed through. The paper gives the function (trilinear interpolation,
// skip flag); the number formats and the truncating rounding are this
// design's. Latency: out_valid one cycle after the in_last (or in_skip) input.
module reducer #(
  parameter int unsigned DATA_W = 16,
  parameter int unsigned ACC_W  = 32,
  parameter int unsigned W_FRAC = 15
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     in_first,
  input  logic                     in_last,
  input  logic                     in_skip,
  input  logic signed [DATA_W-1:0] in_feat,
  input  logic [DATA_W-1:0]        in_w,
  output logic                     out_valid,
  output logic signed [DATA_W-1:0] out_feat
);
  localparam logic signed [ACC_W-1:0] QMAX = ACC_W'((1 << (DATA_W - 1)) - 1);
  localparam logic signed [ACC_W-1:0] QMIN = -ACC_W'(1 << (DATA_W - 1));

  logic signed [ACC_W-1:0] acc;
  logic signed [2*DATA_W:0] prod_full;
  logic signed [ACC_W-1:0]  prod, sum, shifted;

  assign prod_full = $signed({1'b0, in_w}) * in_feat;
  assign prod      = ACC_W'(prod_full);
  assign sum     = (in_first ? '0 : acc) + prod;
  assign shifted = sum >>> W_FRAC;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
      out_feat  <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (in_skip) begin
          out_valid <= 1'b1;
          out_feat  <= in_feat;
        end else begin
          acc <= sum;
          if (in_last) begin
            out_valid <= 1'b1;
            if (shifted > QMAX)      out_feat <= DATA_W'(QMAX);
            else if (shifted < QMIN) out_feat <= DATA_W'(QMIN);
            else                     out_feat <= DATA_W'(shifted);
          end
        end
      end
    end
  end
endmodule
