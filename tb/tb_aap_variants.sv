// Runs the accelerator end to end at the other sizes explored for this
// architecture: NPAR/NGROUP/NMUL = 64/8/16, 64/32/16, 128/16/16 and 64/16/8
// (16 PEs each), one aap_harness per size, all in parallel. Each harness
// checks outputs against a dense reference and exact cycle counts; this
// testbench adds up their results.
module tb_aap_variants;
  int c0, c1, c2, c3, f0, f1, f2, f3;
  bit d0, d1, d2, d3;
  int checks, failures;

  aap_harness #(.NPAR(64),  .NGROUP(8),  .NMUL(16)) u_g8   (.checks(c0), .failures(f0), .finished(d0));
  aap_harness #(.NPAR(64),  .NGROUP(32), .NMUL(16)) u_g32  (.checks(c1), .failures(f1), .finished(d1));
  aap_harness #(.NPAR(128), .NGROUP(16), .NMUL(16)) u_p128 (.checks(c2), .failures(f2), .finished(d2));
  aap_harness #(.NPAR(64),  .NGROUP(16), .NMUL(8))  u_m8   (.checks(c3), .failures(f3), .finished(d3));

  initial begin : watchdog
    #2000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2 + c3, f0 + f1 + f2 + f3 + 1);
    $finish;
  end

  initial begin
    wait (d0 && d1 && d2 && d3);
    checks   = c0 + c1 + c2 + c3;
    failures = f0 + f1 + f2 + f3;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
