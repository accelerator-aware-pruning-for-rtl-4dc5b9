// Test of NBin: writes random rows, reads them back in random order and
// checks the data, the one-cycle read latency and that rd_data holds while
// rd_en is low.
module tb_nbin;
  localparam int NPAR = 64, AB = 16, DEPTH = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [5:0] wr_addr, rd_addr;
  logic [NPAR-1:0][AB-1:0] wr_data, rd_data;
  logic [NPAR-1:0][AB-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  nbin dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      logic [NPAR-1:0][AB-1:0] d;
      for (int e = 0; e < NPAR; e++) d[e] = AB'($urandom);
      model[a] = d;
      @(posedge clk);
      wr_en <= 1; wr_addr <= 6'(a); wr_data <= d;
    end
    @(posedge clk) wr_en <= 0;
    for (int n = 0; n < 200; n++) begin
      int a;
      a = int'($urandom_range(DEPTH - 1));
      @(posedge clk);
      rd_en <= 1; rd_addr <= 6'(a);
      @(posedge clk);
      rd_en <= 0; rd_addr <= 6'(a + 1);
      #1;
      checks++;
      if (rd_data != model[a]) begin failures++; $display("FAIL read %0d", a); end
      @(posedge clk); #1;              // rd_en low: data must hold
      checks++;
      if (rd_data != model[a]) begin failures++; $display("FAIL hold %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
