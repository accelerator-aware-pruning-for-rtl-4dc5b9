// Test of the controller: for several layer descriptors it records every
// issue (NBin row, SB row, NBout row and slice, first/last flags) and compares
// the sequence with a reference loop nest written here; it also checks that
// busy covers the layer and that done comes exactly PIPE_LAT+2 cycles after
// the last issue.
module tb_controller;
  import aap_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  layer_cfg_t cfg;
  logic start = 0, busy, done, iss_valid, iss_first, iss_last;
  logic [5:0] iss_nbin_addr, iss_out_addr;
  logic [6:0] iss_sb_addr;
  logic [1:0] iss_out_slice;
  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  controller dut (.*);

  typedef struct { int nb, sbr, oa, os; bit f, l; } iss_t;
  iss_t got [$];
  int last_iss_cycle;

  always @(posedge clk) if (rst_n && iss_valid) begin
    got.push_back('{int'(iss_nbin_addr), int'(iss_sb_addr), int'(iss_out_addr),
                    int'(iss_out_slice), iss_first, iss_last});
    last_iss_cycle = cycle;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int k, int s, int ow, int oh, int cch, int mb, int r);
    int iw, orows, n, done_cycle;
    iss_t e;
    iw = (ow - 1) * s + k;
    orows = (mb + 3) / 4;
    got.delete();
    cfg = '0;
    cfg.cch = 8'(cch); cfg.k = 4'(k); cfg.stride = 4'(s); cfg.in_w = 8'(iw);
    cfg.out_h = 8'(oh); cfg.out_w = 8'(ow); cfg.mblocks = 8'(mb); cfg.rows_per_fg = 4'(r);
    @(posedge clk) start <= 1;
    @(posedge clk) start <= 0;
    #1;
    checks++;
    if (!busy) begin failures++; $display("FAIL busy not set"); end
    do @(posedge clk); while (!done);
    done_cycle = cycle;
    checks++;
    if (done_cycle - last_iss_cycle != PIPE_LAT + 2) begin
      failures++; $display("FAIL done %0d cycles after last issue", done_cycle - last_iss_cycle);
    end
    @(posedge clk); #1;
    checks++;
    if (busy) begin failures++; $display("FAIL busy after done"); end
    n = 0;
    for (int y = 0; y < oh; y++) for (int x = 0; x < ow; x++) begin
      int sbp;
      sbp = 0;
      for (int b = 0; b < mb; b++) for (int i = 0; i < k; i++) for (int j = 0; j < k; j++)
        for (int c = 0; c < cch; c++) for (int rr = 0; rr < r; rr++) begin
          e.nb  = (((s * y + i) * iw + (s * x + j)) * cch + c) % 64;
          e.sbr = sbp % 128; sbp++;
          e.oa  = ((y * ow + x) * orows + b / 4) % 64;
          e.os  = b % 4;
          e.f   = (i == 0 && j == 0 && c == 0 && rr == 0);
          e.l   = (i == k - 1 && j == k - 1 && c == cch - 1 && rr == r - 1);
          checks++;
          if (n >= got.size() || got[n] != e) begin
            failures++;
            if (failures < 10) $display("FAIL issue %0d", n);
          end
          n++;
        end
    end
    checks++;
    if (got.size() != n) begin failures++; $display("FAIL %0d issues, expected %0d", got.size(), n); end
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    run(3, 1, 2, 2, 1, 2, 1);
    run(1, 1, 3, 2, 2, 5, 2);
    run(3, 2, 2, 2, 1, 1, 3);
    run(2, 1, 1, 1, 3, 1, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
