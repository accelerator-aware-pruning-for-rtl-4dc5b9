// Test of NBout: random slice writes of NPE words into rows, checked against
// a model row by row, so a write that spills into another slice or row is
// seen; also checks the one-cycle read latency.
module tb_nbout;
  localparam int NPAR = 64, NPE = 16, AB = 16, DEPTH = 64, NS = NPAR / NPE;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [5:0] wr_addr, rd_addr;
  logic [1:0] wr_slice;
  logic [NPE-1:0][AB-1:0] wr_data;
  logic [NPAR-1:0][AB-1:0] rd_data;
  logic [NPAR-1:0][AB-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  nbout dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Initialise every slice of every row.
    for (int a = 0; a < DEPTH; a++) for (int s = 0; s < NS; s++) begin
      logic [NPE-1:0][AB-1:0] d;
      for (int e = 0; e < NPE; e++) d[e] = AB'($urandom);
      model[a][s*NPE +: NPE] = d;
      @(posedge clk);
      wr_en <= 1; wr_addr <= 6'(a); wr_slice <= 2'(s); wr_data <= d;
    end
    // Random overwrites of single slices.
    for (int n = 0; n < 300; n++) begin
      int a, s;
      logic [NPE-1:0][AB-1:0] d;
      a = int'($urandom_range(DEPTH - 1)); s = int'($urandom_range(NS - 1));
      for (int e = 0; e < NPE; e++) d[e] = AB'($urandom);
      model[a][s*NPE +: NPE] = d;
      @(posedge clk);
      wr_en <= 1; wr_addr <= 6'(a); wr_slice <= 2'(s); wr_data <= d;
    end
    @(posedge clk) wr_en <= 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(posedge clk);
      rd_en <= 1; rd_addr <= 6'(a);
      @(posedge clk);
      rd_en <= 0;
      #1;
      checks++;
      if (rd_data != model[a]) begin failures++; $display("FAIL row %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
