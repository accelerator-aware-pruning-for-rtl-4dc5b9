// Balanced adder tree: sum = in[0] + ... + in[N-1], each input sign-extended
// from IW to OW bits. Purely combinational. Level by level, neighbouring
// partial sums are added in pairs (an odd one passes through), so the tree
// is ceil(log2 N) adders deep.
module adder_tree #(
  parameter int N  = 16,
  parameter int IW = 32,
  parameter int OW = 48
) (
  input  logic signed [IW-1:0] in [N],
  output logic signed [OW-1:0] sum
);

  always_comb begin
    logic signed [OW-1:0] t [N];
    int w;
    for (int i = 0; i < N; i++) t[i] = OW'(in[i]);
    w = N;
    while (w > 1) begin
      for (int i = 0; i < w / 2; i++) t[i] = t[2*i] + t[2*i + 1];
      if (w % 2 == 1) t[w/2] = t[w - 1];
      w = (w + 1) / 2;
    end
    sum = t[0];
  end

endmodule
