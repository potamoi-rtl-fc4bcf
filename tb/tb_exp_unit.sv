// tb_exp_unit: checks the iterative exponential against the real-number
// exp() for arguments across [-1, 1] (a sweep plus random values) and the
// whole Q3.12 range [-8, 8) (a sweep, random values, the extremes; results
// above 7.99976 must saturate), with a tolerance of 3 LSB of Q3.12, and checks the start-to-done latency of
// ITERS + SCALE + 1 cycles.
module tb_exp_unit;
  localparam int ITERS = 20, SCALE = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0;
  logic signed [15:0] x = '0;
  logic busy, done;
  logic signed [15:0] y;
  int checks = 0, failures = 0;

  exp_unit #(.ITERS(ITERS)) dut (.clk, .rst_n, .start, .x, .busy, .done, .y);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic signed [15:0] xv);
    int lat;
    real ref_v, got;
    @(negedge clk);
    x = xv; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    ref_v = $exp(real'(xv) / 4096.0);
    if (ref_v > 32767.0 / 4096.0) ref_v = 32767.0 / 4096.0;   // Q3.12 saturation
    got  = real'(y) / 4096.0;
    checks++;
    if ((got - ref_v) > 3.0/4096.0 || (ref_v - got) > 3.0/4096.0) begin
      failures++;
      $display("exp mismatch x=%f got=%f ref=%f", real'(xv)/4096.0, got, ref_v);
    end
    checks++;
    if (lat != ITERS + SCALE + 1) begin
      failures++;
      $display("latency %0d, expected %0d", lat, ITERS + SCALE + 1);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int v = -4096; v <= 4096; v += 256) run(16'(v));
    for (int n = 0; n < 40; n++) run(16'($signed(12'($urandom)) * 2));
    for (int v = -32768; v < 32768; v += 997) run(16'(v));          // whole Q3.12 range
    for (int n = 0; n < 100; n++) run(16'($urandom));
    run(16'sd4096); run(-16'sd4096); run(16'sd0); run(16'sh7fff); run(16'sh8000); run(16'sd8517);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
