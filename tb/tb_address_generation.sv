// tb_address_generation: drives the address generator from a model RIT
// (registered read, like the real buffer) and records every issued read.
// Structured jobs: each sample must issue its eight vertices in order with
// the right MFT row (VID - base), weight and first/last flags, two samples
// at a time, 8 cycles per pair plus one priming cycle. Unstructured jobs:
// every PID once, two per cycle, skip set. Random stall cycles must freeze
// the issue without losing or repeating anything.
module tb_address_generation;
  import potamoi_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 0, stall = 0;
  rep_e mode = REP_STRUCTURED;
  logic [CNT_W-1:0] count = '0;
  logic [VID_W-1:0] base = '0;
  logic [1:0][RIT_ROW_AW-1:0] rit_row;
  logic [1:0][RIT_ENTRY_W-1:0] rit_data;
  logic [1:0] iss_valid, iss_first, iss_last, iss_skip;
  logic [1:0][MFT_AW-1:0] iss_addr;
  logic [1:0][FEAT_W-1:0] iss_w;
  logic [1:0][CNT_W-1:0] iss_id;
  logic busy, done;
  int checks = 0, failures = 0;

  logic [RIT_ENTRY_W-1:0] rit [128];

  address_generation dut (.clk, .rst_n, .start, .mode, .count, .base, .stall, .rit_row, .rit_data,
                          .iss_valid, .iss_addr, .iss_w, .iss_first, .iss_last, .iss_skip, .iss_id, .busy, .done);

  always #5 clk = ~clk;
  always_ff @(posedge clk) for (int p = 0; p < 2; p++) rit_data[p] <= rit[rit_row[p]];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // recorded issues: {id, vertex-or-slot, addr, w, first, last, skip}
  typedef struct { int id; int addr; int w; bit first, last, skip; } iss_t;
  iss_t log_q [2][$];
  int active_cycles, stall_cycles;

  always @(negedge clk) begin
    if (busy) active_cycles++;
    if (busy && stall) stall_cycles++;
    for (int p = 0; p < 2; p++)
      if (iss_valid[p]) begin
        iss_t e;
        e.id = int'(iss_id[p]); e.addr = int'(iss_addr[p]); e.w = int'(iss_w[p]);
        e.first = iss_first[p]; e.last = iss_last[p]; e.skip = iss_skip[p];
        log_q[p].push_back(e);
        if (stall) begin failures++; $display("issue during stall"); end
      end
  end

  task automatic run_job(rep_e md, int n, int b, bit use_stall);
    active_cycles = 0; stall_cycles = 0;
    log_q[0].delete(); log_q[1].delete();
    for (int r = 0; r < 128; r++)
      for (int w = 0; w < 12; w++) rit[r][32*w +: 32] = $urandom;
    if (md == REP_STRUCTURED)
      for (int r = 0; r < 128; r++)
        for (int v = 0; v < 8; v++) rit[r][48*v +: 48] = {32'(b + $urandom_range(0, 511)), 16'($urandom)};
    else
      for (int r = 0; r < 128; r++)
        for (int j = 0; j < 12; j++) rit[r][32*j +: 32] = 32'(b + $urandom_range(0, 511));
    @(negedge clk);
    mode = md; count = CNT_W'(n); base = 32'(b); start = 1;
    @(negedge clk);
    start = 0;
    while (busy) begin
      @(posedge clk); #1;
      stall = use_stall && ($urandom_range(0, 3) == 0);
    end
    stall = 0;
    // compare
    for (int p = 0; p < 2; p++) begin
      int k = 0;
      for (int s = p; s < n; s += 2) begin
        if (md == REP_STRUCTURED) begin
          for (int v = 0; v < 8; v++) begin
            logic [47:0] slot = rit[s][48*v +: 48];
            checks++;
            if (k >= log_q[p].size() || log_q[p][k].id != s || log_q[p][k].addr != int'(9'(slot[47:16] - 32'(b)))
                || log_q[p][k].w != int'(slot[15:0]) || log_q[p][k].first != (v == 0) || log_q[p][k].last != (v == 7)
                || log_q[p][k].skip) begin
              failures++; $display("structured port %0d sample %0d vertex %0d wrong", p, s, v);
            end
            k++;
          end
        end else begin
          logic [31:0] pid = rit[s / 12][32 * (s % 12) +: 32];
          checks++;
          if (k >= log_q[p].size() || log_q[p][k].id != s || log_q[p][k].addr != int'(9'(pid - 32'(b)))
              || !log_q[p][k].skip || !log_q[p][k].first || !log_q[p][k].last) begin
            failures++; $display("unstructured port %0d pid %0d wrong", p, s);
          end
          k++;
        end
      end
      checks++;
      if (k != log_q[p].size()) begin failures++; $display("port %0d issued %0d, expected %0d", p, log_q[p].size(), k); end
    end
    // cycle count: 1 priming cycle + issue cycles + stalls
    begin
      int issue = (md == REP_STRUCTURED) ? ((n + 1) / 2) * 8 : (n + 1) / 2;
      checks++;
      if (active_cycles != 1 + issue + stall_cycles) begin
        failures++; $display("cycles %0d expected %0d", active_cycles, 1 + issue + stall_cycles);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_job(REP_STRUCTURED, 13, 4096, 0);
    run_job(REP_STRUCTURED, 128, 123456, 1);
    run_job(REP_STRUCTURED, 1, 0, 0);
    run_job(REP_UNSTRUCTURED, 25, 777, 0);
    run_job(REP_UNSTRUCTURED, 1536, 1 << 20, 1);
    run_job(REP_UNSTRUCTURED, 2, 5, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
