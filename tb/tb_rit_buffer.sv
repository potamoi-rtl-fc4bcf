// tb_rit_buffer: fills both RIT buffers word by word (entry n at word
// addresses 6n..6n+5, last entry at 0x2FA) and reads whole entries back on
// both read ports; checks word placement inside an entry, buffer separation
// and the one-cycle read latency.
module tb_rit_buffer;
  import potamoi_pkg::*;
  logic clk = 1'b0;
  logic wr_en = 0, wr_buf = 0, rd_buf = 0;
  logic [9:0] wr_addr = '0;
  logic [63:0] wr_data = '0;
  logic [1:0][6:0] rd_row = '0;
  logic [1:0][383:0] rd_data;
  int checks = 0, failures = 0;
  logic [383:0] model [2][128];

  rit_buffer dut (.clk, .wr_en, .wr_buf, .wr_addr, .wr_data, .rd_buf, .rd_row, .rd_data);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < 768; a++) begin
        @(negedge clk);
        wr_en = 1; wr_buf = b[0]; wr_addr = 10'(a); wr_data = {$urandom, $urandom};
        model[b][a / 6][64 * (a % 6) +: 64] = wr_data;
      end
    @(negedge clk) wr_en = 0;
    for (int b = 0; b < 2; b++)
      for (int r = 0; r < 128; r++) begin
        @(negedge clk);
        rd_buf = b[0]; rd_row[0] = 7'(r); rd_row[1] = 7'(127 - r);
        @(negedge clk);
        checks += 2;
        if (rd_data[0] !== model[b][r])       begin failures++; $display("buf %0d entry %0d port0", b, r); end
        if (rd_data[1] !== model[b][127 - r]) begin failures++; $display("buf %0d entry %0d port1", b, 127 - r); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
