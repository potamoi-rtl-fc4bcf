// vector_unit: element-wise post-processing of one systolic-array result row.
//
// Each of the LANES lanes takes a 32-bit accumulator, shifts it right
// arithmetically by `shift` and saturates it to 16 bits (requantisation back
// to the Q3.12 activation format), then applies the selected operation:
// pass-through, ReLU, or exponential through the iterative exp_unit (the
// paper's extension of the vector unit for 3D Gaussian splatting). All lanes
// work in parallel; there is one exp_unit per lane.
//
// The paper names ReLU and exponential as vector-unit operations; the lane
// count (one per array column), the requantisation step and the op encoding
// are this design's choices.
//
// Interface: pulse start with op, shift and acc_in. done pulses with res
// 1 cycle later for VOP_NONE / VOP_RELU and ITERS + 5 cycles later for
// VOP_EXP. busy is high in between; start is ignored while busy.
module vector_unit
  import potamoi_pkg::*;
#(
  parameter int unsigned LANES = 24,
  parameter int unsigned ITERS = 20
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             start,
  input  vop_e                             op,
  input  logic [4:0]                       shift,
  input  logic [LANES-1:0][ACC_W-1:0]      acc_in,
  output logic                             busy,
  output logic                             done,
  output logic [LANES-1:0][FEAT_W-1:0]     res
);
  localparam logic signed [ACC_W-1:0] QMAX = ACC_W'((1 << (FEAT_W - 1)) - 1);
  localparam logic signed [ACC_W-1:0] QMIN = -ACC_W'(1 << (FEAT_W - 1));

  logic [LANES-1:0][FEAT_W-1:0] q;
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [ACC_W-1:0] s;
      s = $signed(acc_in[l]) >>> shift;
      if (s > QMAX)      q[l] = FEAT_W'(QMAX);
      else if (s < QMIN) q[l] = FEAT_W'(QMIN);
      else               q[l] = FEAT_W'(s);
    end
  end

  logic                     exp_start;
  logic [LANES-1:0]         exp_done;
  logic [LANES-1:0]         exp_busy;
  logic [LANES-1:0][FEAT_W-1:0] exp_y;
  logic [LANES-1:0][FEAT_W-1:0] exp_x;

  assign exp_start = start && !busy && (op == VOP_EXP);

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    exp_unit #(.ITERS(ITERS), .DATA_W(FEAT_W), .FRAC(FRAC)) u_exp (
      .clk  (clk),
      .rst_n(rst_n),
      .start(exp_start),
      .x    (exp_x[l]),
      .busy (exp_busy[l]),
      .done (exp_done[l]),
      .y    (exp_y[l])
    );
  end

  logic exp_wait;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      exp_wait <= 1'b0;
      res      <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        unique case (op)
          VOP_EXP: begin
            busy     <= 1'b1;
            exp_wait <= 1'b1;
          end
          VOP_RELU: begin
            for (int l = 0; l < LANES; l++)
              res[l] <= q[l][FEAT_W-1] ? '0 : q[l];
            done <= 1'b1;
          end
          default: begin
            res  <= q;
            done <= 1'b1;
          end
        endcase
      end else if (exp_wait && exp_done[0]) begin
        res      <= exp_y;
        busy     <= 1'b0;
        exp_wait <= 1'b0;
        done     <= 1'b1;
      end
    end
  end

  // exp_unit samples its argument on the start cycle: feed q directly
  always_comb exp_x = q;

endmodule
