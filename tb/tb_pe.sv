// Test of one PE: streams outputs made of a random number of operand cycles
// (with idle gaps), computes each expected dot product here and checks acc
// when out_valid rises, exactly 3 cycles after the last operand cycle.
module tb_pe;
  localparam int NMUL = 16, AB = 16, WB = 16, ACCB = 48;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_first = 0, in_last = 0;
  logic [NMUL-1:0][AB-1:0] act;
  logic [NMUL-1:0][WB-1:0] wgt;
  logic out_valid;
  logic signed [ACCB-1:0] acc;
  int checks = 0, failures = 0;
  int cycle = 0;
  longint exp_q [$];
  int     exp_t [$];

  pe dut (.*);

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Checker.
  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 2;
    if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected out_valid"); end
    else begin
      longint e; int t;
      e = exp_q.pop_front(); t = exp_t.pop_front();
      if (acc != ACCB'(e)) begin failures++; $display("FAIL acc %0d expected %0d", acc, e); end
      if (cycle != t + 3) begin failures++; $display("FAIL latency %0d", cycle - t); end
    end
  end

  initial begin
    act = '0; wgt = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 300; n++) begin
      int len;
      longint sum;
      len = int'($urandom_range(1, 6));
      sum = 0;
      for (int c = 0; c < len; c++) begin
        @(posedge clk);
        in_valid <= 1; in_first <= (c == 0); in_last <= (c == len - 1);
        for (int l = 0; l < NMUL; l++) begin
          logic [AB-1:0] a; logic [WB-1:0] w;
          a = (n % 7 == 0) ? 16'h8000 : AB'($urandom);   // include extreme values
          w = (n % 7 == 0) ? 16'h8000 : WB'($urandom);
          act[l] <= a; wgt[l] <= w;
          sum += longint'($signed(a)) * longint'($signed(w));
        end
        if (c == len - 1) begin exp_q.push_back(sum); exp_t.push_back(cycle + 1); end
      end
      @(posedge clk);
      in_valid <= 0; in_first <= 0; in_last <= 0;
      repeat ($urandom_range(0, 2)) @(posedge clk);
    end
    repeat (6) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
