// tb_vector_unit: random accumulator rows through the three operations:
// pass (shift + saturate), ReLU and exp (arguments chosen in [-1, 1] after
// the shift). Results are compared with a model; exp with 3 LSB tolerance.
// Checks latencies: 1 cycle for pass/ReLU, ITERS + 5 for exp (20 iterations, 3 squarings).
module tb_vector_unit;
  import potamoi_pkg::*;
  localparam int L = 24, ITERS = 20;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 0;
  vop_e op = VOP_NONE;
  logic [4:0] shift = '0;
  logic [L-1:0][31:0] acc_in = '0;
  logic busy, done;
  logic [L-1:0][15:0] res;
  int checks = 0, failures = 0;

  vector_unit #(.LANES(L), .ITERS(ITERS)) dut (.clk, .rst_n, .start, .op, .shift, .acc_in, .busy, .done, .res);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int q16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int lat;
      automatic vop_e o = vop_e'(t % 3);
      @(negedge clk);
      op = o;
      shift = (o == VOP_EXP) ? 5'd12 : 5'($urandom_range(0, 16));
      for (int l = 0; l < L; l++)
        acc_in[l] = (o == VOP_EXP) ? 32'(int'($urandom_range(0, 8192)) - 4096) <<< 12
                                   : (t % 4 == 0 ? 32'($urandom) : 32'($signed(20'($urandom))));
      start = 1;
      @(negedge clk);
      start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (lat != ((o == VOP_EXP) ? ITERS + 5 : 1)) begin failures++; $display("op %0d latency %0d", o, lat); end
      for (int l = 0; l < L; l++) begin
        automatic int qv = q16($signed(acc_in[l]) >>> shift);
        automatic int got = int'($signed(res[l]));
        checks++;
        case (o)
          VOP_NONE: if (got != qv) begin failures++; $display("pass lane %0d", l); end
          VOP_RELU: if (got != (qv < 0 ? 0 : qv)) begin failures++; $display("relu lane %0d", l); end
          default: begin
            automatic real r = $exp(real'(qv) / 4096.0) * 4096.0;
            if (real'(got) - r > 3.0 || r - real'(got) > 3.0) begin
              failures++; $display("exp lane %0d got %0d ref %f", l, got, r);
            end
          end
        endcase
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
