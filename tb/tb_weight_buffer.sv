// tb_weight_buffer: writes random rows at random addresses over the whole
// 2048-row (96 KB) buffer, reads them back and compares with a model;
// checks the one-cycle read latency.
module tb_weight_buffer;
  logic clk = 1'b0;
  logic wr_en = 0, rd_en = 0;
  logic [10:0] wr_addr = '0, rd_addr = '0;
  logic [383:0] wr_data = '0, rd_data;
  int checks = 0, failures = 0;
  logic [383:0] model [int];

  weight_buffer dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [383:0] rnd();
    logic [383:0] r;
    for (int i = 0; i < 12; i++) r[32*i +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    int addrs [$];
    for (int i = 0; i < 300; i++) begin
      automatic int a = (i < 2) ? (i == 0 ? 0 : 2047) : $urandom_range(0, 2047);
      @(negedge clk);
      wr_en = 1; wr_addr = 11'(a); wr_data = rnd();
      model[a] = wr_data;
      addrs.push_back(a);
    end
    @(negedge clk) wr_en = 0;
    foreach (addrs[i]) begin
      @(negedge clk);
      rd_en = 1; rd_addr = 11'(addrs[i]);
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_data !== model[addrs[i]]) begin failures++; $display("row %0d mismatch", addrs[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
