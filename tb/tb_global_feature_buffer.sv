// tb_global_feature_buffer: writes rows in both halves (first and last row
// of each half, random rows in between), reads them back through both read
// ports and compares with a model; checks that the two halves are separate
// storage and that reads take one cycle.
module tb_global_feature_buffer;
  logic clk = 1'b0;
  logic wr_en = 0, wr_half = 0, rd_en = 0, rd_half = 0, hrd_en = 0, hrd_half = 0;
  logic [13:0] wr_addr = '0, rd_addr = '0, hrd_addr = '0;
  logic [511:0] wr_data = '0, rd_data, hrd_data;
  int checks = 0, failures = 0;
  logic [511:0] model [int];

  global_feature_buffer dut (.clk, .wr_en, .wr_half, .wr_addr, .wr_data, .rd_en, .rd_half, .rd_addr, .rd_data,
                             .hrd_en, .hrd_half, .hrd_addr, .hrd_data);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [511:0] rnd();
    logic [511:0] r;
    for (int i = 0; i < 16; i++) r[32*i +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    int keys [$];
    for (int i = 0; i < 400; i++) begin
      automatic int h = i % 2;
      automatic int a = (i < 4) ? ((i / 2) == 0 ? 0 : 12287) : $urandom_range(0, 12287);
      if (i >= 4 && i < 40) a = i;      // same rows in both halves
      @(negedge clk);
      wr_en = 1; wr_half = h[0]; wr_addr = 14'(a); wr_data = rnd();
      model[h * 16384 + a] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    foreach (model[k]) keys.push_back(k);
    foreach (keys[i]) begin
      @(negedge clk);
      rd_en = 1; rd_half = keys[i][14]; rd_addr = 14'(keys[i]);
      hrd_en = 1; hrd_half = keys[(i + 1) % keys.size()][14]; hrd_addr = 14'(keys[(i + 1) % keys.size()]);
      @(negedge clk);
      rd_en = 0; hrd_en = 0;
      checks += 2;
      if (rd_data !== model[keys[i]]) begin failures++; $display("port A key %0d mismatch", keys[i]); end
      if (hrd_data !== model[keys[(i + 1) % keys.size()]]) begin failures++; $display("host port mismatch"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
