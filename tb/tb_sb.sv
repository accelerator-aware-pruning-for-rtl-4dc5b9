// Test of SB: fills every row of every PE bank with random weight/index
// pairs, then reads random rows at one shared address and checks every lane
// of every bank (weights and indices separately) one cycle later.
module tb_sb;
  localparam int NPE = 16, NMUL = 16, WB = 16, IW = 4, DEPTH = 128;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [3:0] wr_pe;
  logic [6:0] wr_addr, rd_addr;
  logic [NMUL-1:0][WB-1:0] wr_wgt;
  logic [NMUL-1:0][IW-1:0] wr_idx;
  logic [NPE-1:0][NMUL-1:0][WB-1:0] rd_wgt;
  logic [NPE-1:0][NMUL-1:0][IW-1:0] rd_idx;
  logic [NMUL-1:0][WB-1:0] mw [NPE][DEPTH];
  logic [NMUL-1:0][IW-1:0] mi [NPE][DEPTH];
  int checks = 0, failures = 0;

  sb dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < NPE; p++) for (int a = 0; a < DEPTH; a++) begin
      for (int l = 0; l < NMUL; l++) begin
        mw[p][a][l] = WB'($urandom);
        mi[p][a][l] = IW'($urandom);
      end
      @(posedge clk);
      wr_en <= 1; wr_pe <= 4'(p); wr_addr <= 7'(a); wr_wgt <= mw[p][a]; wr_idx <= mi[p][a];
    end
    @(posedge clk) wr_en <= 0;
    for (int n = 0; n < 100; n++) begin
      int a;
      a = int'($urandom_range(DEPTH - 1));
      @(posedge clk);
      rd_en <= 1; rd_addr <= 7'(a);
      @(posedge clk);
      rd_en <= 0;
      #1;
      for (int p = 0; p < NPE; p++) begin
        checks += 2;
        if (rd_wgt[p] != mw[p][a]) begin failures++; $display("FAIL wgt pe %0d row %0d", p, a); end
        if (rd_idx[p] != mi[p][a]) begin failures++; $display("FAIL idx pe %0d row %0d", p, a); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
