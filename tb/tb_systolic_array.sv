// tb_systolic_array: random 24 x K by K x 24 products (K = 1, 7, 24, 32) on
// the full 24 x 24 array, compared with a software matrix product; checks
// that the result is complete exactly K + ROWS + COLS - 2 steps after the
// first column and not one step earlier (last PE still missing a term).
module tb_systolic_array;
  localparam int R = 24, C = 24;
  logic clk = 1'b0, rst_n = 1'b0;
  logic clear = 0, en = 0;
  logic [R-1:0][15:0] a_in = '0;
  logic [C-1:0][15:0] b_in = '0;
  logic [4:0] rd_row = '0;
  logic [C-1:0][31:0] rd_data;
  int checks = 0, failures = 0;

  systolic_array dut (.clk, .rst_n, .clear, .en, .a_in, .b_in, .rd_row, .rd_data);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [15:0] A [R][32];
  logic signed [15:0] Bm [32][C];
  int ks [4] = '{1, 7, 24, 32};

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (ks[t]) begin
      automatic int K = ks[t];
      for (int i = 0; i < R; i++) for (int k = 0; k < K; k++) A[i][k] = 16'($urandom);
      for (int k = 0; k < K; k++) for (int j = 0; j < C; j++) Bm[k][j] = 16'($urandom);
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      for (int s = 0; s < K + R + C - 2; s++) begin
        en = 1;
        for (int i = 0; i < R; i++) a_in[i] = (s < K) ? A[i][s] : '0;
        for (int j = 0; j < C; j++) b_in[j] = (s < K) ? Bm[s][j] : '0;
        @(negedge clk);
        if (s == K + R + C - 4) begin
          // one step before completion: PE (R-1, C-1) lacks its last term
          logic signed [31:0] partial;
          partial = 0;
          for (int k = 0; k < K - 1; k++) partial += 32'(A[R-1][k] * Bm[k][C-1]);
          en = 0; rd_row = 5'(R - 1); #1;
          checks++;
          if (rd_data[C-1] !== partial) begin failures++; $display("K=%0d early value wrong", K); end
        end
      end
      en = 0; a_in = '0; b_in = '0;
      for (int i = 0; i < R; i++) begin
        rd_row = 5'(i); #1;
        for (int j = 0; j < C; j++) begin
          logic signed [31:0] ref_v;
          ref_v = 0;
          for (int k = 0; k < K; k++) ref_v += 32'(A[i][k] * Bm[k][j]);
          checks++;
          if (rd_data[j] !== ref_v) begin
            failures++;
            if (failures < 10) $display("K=%0d C[%0d][%0d] = %0d, expected %0d", K, i, j, $signed(rd_data[j]), ref_v);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
