// Test of the IM: random activation rows and random direct indices; every
// selected activation must equal activation (lane's pruning group)*16 + index,
// with lane l of a PE belonging to pruning group l/4 (64 activations, groups
// of 16, 16 lanes). Also runs every index value on every lane once.
module tb_im;
  localparam int NPE = 16, NPAR = 64, NGROUP = 16, NMUL = 16, AB = 16, IW = 4;
  localparam int LPG = NMUL / (NPAR / NGROUP);
  logic [NPAR-1:0][AB-1:0] act;
  logic [NPE-1:0][NMUL-1:0][IW-1:0] idx;
  logic [NPE-1:0][NMUL-1:0][AB-1:0] sel;
  int checks = 0, failures = 0;

  im dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    #1;
    for (int p = 0; p < NPE; p++) for (int l = 0; l < NMUL; l++) begin
      logic [AB-1:0] expv;
      expv = act[(l / LPG) * NGROUP + int'(idx[p][l])];
      checks++;
      if (sel[p][l] !== expv) begin
        failures++;
        if (failures < 10) $display("FAIL pe %0d lane %0d idx %0d", p, l, idx[p][l]);
      end
    end
  endtask

  initial begin
    for (int n = 0; n < 50; n++) begin
      for (int e = 0; e < NPAR; e++) act[e] = AB'($urandom);
      for (int p = 0; p < NPE; p++) for (int l = 0; l < NMUL; l++) idx[p][l] = IW'($urandom);
      check_all();
    end
    for (int v = 0; v < NGROUP; v++) begin
      for (int e = 0; e < NPAR; e++) act[e] = AB'(e * 257 + 1);
      for (int p = 0; p < NPE; p++) for (int l = 0; l < NMUL; l++) idx[p][l] = IW'(v);
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
