// tb_reducer: random trilinear interpolations (eight weighted vertex values
// per sample, weights summing to about 1.0 in Q1.15) compared with a
// software model of the same fixed-point arithmetic, plus skip
// (pass-through) samples. Checks the one-cycle output latency.
module tb_reducer;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 0, in_first = 0, in_last = 0, in_skip = 0;
  logic signed [15:0] in_feat = '0;
  logic [15:0] in_w = '0;
  logic out_valid;
  logic signed [15:0] out_feat;
  int checks = 0, failures = 0;

  reducer dut (.clk, .rst_n, .in_valid, .in_first, .in_last, .in_skip, .in_feat, .in_w, .out_valid, .out_feat);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [15:0] sat(longint v);
    if (v > 32767) return 16'sd32767;
    if (v < -32768) return -16'sd32768;
    return 16'(v);
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 200; s++) begin
      automatic longint acc = 0;
      logic signed [15:0] f [8];
      logic [15:0] w [8];
      automatic int rem = 32768;
      automatic bit skip = (s % 5 == 4);
      for (int v = 0; v < 8; v++) begin
        f[v] = 16'($urandom);
        if (s % 7 == 0) f[v] = 16'sd30000;       // drives saturation-free large sums
        w[v] = (v == 7) ? 16'(rem) : 16'($urandom_range(0, rem / 2));
        rem -= int'(w[v]);
        acc += longint'(w[v]) * longint'(f[v]);
      end
      if (skip) begin
        @(negedge clk);
        in_valid = 1; in_first = 1; in_last = 1; in_skip = 1; in_feat = f[0]; in_w = '0;
        @(negedge clk);
        in_valid = 0; in_skip = 0;
        checks++;
        if (!out_valid || out_feat !== f[0]) begin
          failures++; $display("skip mismatch %0d vs %0d", out_feat, f[0]);
        end
      end else begin
        for (int v = 0; v < 8; v++) begin
          @(negedge clk);
          in_valid = 1; in_first = (v == 0); in_last = (v == 7); in_skip = 0;
          in_feat = f[v]; in_w = w[v];
          if (v > 0) begin
            checks++;
            if (out_valid) begin failures++; $display("early out_valid"); end
          end
        end
        @(negedge clk);
        in_valid = 0; in_last = 0;
        checks++;
        if (!out_valid || out_feat !== sat(acc >>> 15)) begin
          failures++; $display("sample %0d: got %0d exp %0d", s, out_feat, sat(acc >>> 15));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
