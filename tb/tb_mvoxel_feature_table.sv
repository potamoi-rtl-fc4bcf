// tb_mvoxel_feature_table: loads one MVoxel (512 points x 32 channels) into
// each buffer, then reads two different random points per cycle on the two
// ports. Every read must return all 32 channels of its point in the next
// cycle: no read ever waits, which is the bank-conflict-free property.
module tb_mvoxel_feature_table;
  import potamoi_pkg::*;
  logic clk = 1'b0;
  logic wr_en = 0, wr_buf = 0, rd_buf = 0;
  logic [8:0] wr_addr = '0;
  logic [31:0][15:0] wr_data = '0;
  logic [1:0] rd_en = '0;
  logic [1:0][8:0] rd_addr = '0;
  logic [1:0][31:0][15:0] rd_data;
  int checks = 0, failures = 0;
  logic [31:0][15:0] model [2][512];

  mvoxel_feature_table dut (.clk, .wr_en, .wr_buf, .wr_addr, .wr_data, .rd_buf, .rd_en, .rd_addr, .rd_data);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < 2; b++)
      for (int p = 0; p < 512; p++) begin
        @(negedge clk);
        wr_en = 1; wr_buf = b[0]; wr_addr = 9'(p);
        for (int c = 0; c < 32; c++) wr_data[c] = 16'($urandom);
        model[b][p] = wr_data;
      end
    @(negedge clk) wr_en = 0;
    for (int t = 0; t < 1000; t++) begin
      automatic int b = t % 2;
      automatic int p0 = $urandom_range(0, 511), p1 = $urandom_range(0, 511);
      @(negedge clk);
      rd_buf = b[0]; rd_en = 2'b11; rd_addr[0] = 9'(p0); rd_addr[1] = 9'(p1);
      @(negedge clk);
      rd_en = '0;
      checks += 2;
      if (rd_data[0] !== model[b][p0]) begin failures++; $display("port0 point %0d", p0); end
      if (rd_data[1] !== model[b][p1]) begin failures++; $display("port1 point %0d", p1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
