// PE: sparse multiply-accumulate unit.
//
// NMUL multipliers each take one non-zero weight and the activation the IM
// selected for it; an adder tree sums the NMUL products and an accumulator
// adds the sums of all fetching groups (and all SB rows of each group) that
// make up one output activation. This is the PE datapath of the sparse
// channel-axis design: multipliers, one adder tree and one accumulator.
//
// Interface: in_valid marks a cycle with operands; in_first restarts the
// accumulator with this cycle's sum; in_last marks the final operands of an
// output. Timing: products are registered, the tree sum is registered, then
// accumulated, so out_valid rises 3 cycles after the in_valid/in_last cycle
// and acc holds the finished output for that cycle and until the next one.
// The register stages and the signed 16-bit fixed-point arithmetic are this
// design's own choices.
module pe #(
  parameter int NMUL    = aap_pkg::NMUL_D,
  parameter int ABITS   = aap_pkg::ABITS_D,
  parameter int WBITS   = aap_pkg::WBITS_D,
  parameter int ACCBITS = aap_pkg::ACCBITS_D,
  localparam int PBITS  = ABITS + WBITS
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              in_valid,
  input  logic                              in_first,
  input  logic                              in_last,
  input  logic [NMUL-1:0][ABITS-1:0]        act,
  input  logic [NMUL-1:0][WBITS-1:0]        wgt,
  output logic                              out_valid,
  output logic signed [ACCBITS-1:0]         acc
);

  // Stage 1: products.
  logic signed [PBITS-1:0] prod [NMUL];
  logic s1_v, s1_first, s1_last;
  always_ff @(posedge clk) begin
    for (int l = 0; l < NMUL; l++) begin
      prod[l] <= $signed(act[l]) * $signed(wgt[l]);
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) {s1_v, s1_first, s1_last} <= '0;
    else        {s1_v, s1_first, s1_last} <= {in_valid, in_first, in_last};
  end

  // Stage 2: adder tree over the NMUL products.
  logic signed [ACCBITS-1:0] tree_sum;
  adder_tree #(.N(NMUL), .IW(PBITS), .OW(ACCBITS)) u_tree (.in(prod), .sum(tree_sum));

  logic signed [ACCBITS-1:0] s2_sum;
  logic s2_v, s2_first, s2_last;
  always_ff @(posedge clk) s2_sum <= tree_sum;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) {s2_v, s2_first, s2_last} <= '0;
    else        {s2_v, s2_first, s2_last} <= {s1_v, s1_first, s1_last};
  end

  // Stage 3: accumulator.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
    end else begin
      if (s2_v) acc <= s2_first ? s2_sum : acc + s2_sum;
      out_valid <= s2_v && s2_last;
    end
  end

endmodule
