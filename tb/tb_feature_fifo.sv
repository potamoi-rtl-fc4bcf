// tb_feature_fifo: random push/pop traffic (never pushing when full or
// popping when empty) compared with a queue model: order, data, count,
// empty and full flags.
module tb_feature_fifo;
  localparam int W = 40, D = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic push = 0, pop = 0;
  logic [W-1:0] din = '0, dout;
  logic empty, full;
  logic [3:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] q [$];

  feature_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .push, .din, .pop, .dout, .empty, .full, .count);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      checks++;
      if (count != 4'(q.size()) || empty != (q.size() == 0) || full != (q.size() == D)) begin
        failures++; $display("t=%0d count %0d model %0d", t, count, q.size());
      end
      if (q.size() > 0) begin
        checks++;
        if (dout !== q[0]) begin failures++; $display("t=%0d head mismatch", t); end
      end
      push = !full && ($urandom_range(0, 99) < ((t / 500) % 2 ? 70 : 35));
      pop  = !empty && ($urandom_range(0, 99) < ((t / 500) % 2 ? 35 : 70));
      din  = {$urandom, 8'($urandom)};
      @(posedge clk);
      #1;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
      push = 0; pop = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
