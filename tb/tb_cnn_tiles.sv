// Workload test: one output tile of each AlexNet convolution layer conv2 to
// conv5 and of a ResNet-50 1x1 layer with 2048 input channels, pruned 12 of
// 16 weights per pruning group along the channel axis, on the accelerator at
// its default sizes. Each tile has its layer's kernel size and channel count,
// one or two output positions and as many blocks of 16 filters as SB holds.
// conv2 has only 48 input channels per convolution group, so one pruning
// group of each 64-channel fetch is empty and a quarter of the lanes carry
// padding zeros (at most 75 % utilisation). The other layers keep all 256
// multipliers busy apart from the pipeline fill. Outputs are checked against
// a dense reference and cycle counts exactly (aap_harness); the multiplier
// utilisation of each tile is printed.
module tb_cnn_tiles;
  int c, f;
  bit d;

  aap_harness #(.MODE(1)) u_h (.checks(c), .failures(f), .finished(d));

  initial begin : watchdog
    #5000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c, f + 1);
    $finish;
  end

  initial begin
    wait (d);
    $display("TB_RESULT checks=%0d failures=%0d", c, f);
    $finish;
  end
endmodule
