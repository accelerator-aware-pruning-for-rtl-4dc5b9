// IM: indexing module, the activation selection of all PEs.
//
// The NPAR fetched activations are split into G = NPAR/NGROUP pruning groups
// of NGROUP activations each. Multiplier lane l of every PE is wired to
// pruning group l / (NMUL/G) and owns one NGROUP-to-1 multiplexer per
// activation bit, steered by the lane's direct index from SB. With the
// default sizes this is 16 x 16 x 16-bit 16-to-1 multiplexers instead of the
// 256-to-1 ones an unconstrained sparse design needs.
//
// Interface: act (fetched row), idx (indices of all PEs and lanes), sel
// (selected activations). Purely combinational. The narrow multiplexers per
// pruning group follow the paper; tying each lane to one fixed group
// generalises the paper's eight-activation, two-multiplier example.
module im #(
  parameter int NPE    = aap_pkg::NPE_D,
  parameter int NPAR   = aap_pkg::NPAR_D,
  parameter int NGROUP = aap_pkg::NGROUP_D,
  parameter int NMUL   = aap_pkg::NMUL_D,
  parameter int ABITS  = aap_pkg::ABITS_D,
  localparam int IDXW  = $clog2(NGROUP),
  localparam int G     = NPAR / NGROUP,
  localparam int LPG   = NMUL / G          // lanes per pruning group
) (
  input  logic [NPAR-1:0][ABITS-1:0]            act,
  input  logic [NPE-1:0][NMUL-1:0][IDXW-1:0]    idx,
  output logic [NPE-1:0][NMUL-1:0][ABITS-1:0]   sel
);

  if (NPAR % NGROUP != 0 || NMUL % G != 0 || NMUL < G) begin : g_bad
    $error("im: NPAR must be a multiple of NGROUP and NMUL a multiple of NPAR/NGROUP");
  end

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    for (genvar l = 0; l < NMUL; l++) begin : g_lane
      localparam int GRP = l / LPG;
      logic [NGROUP-1:0][ABITS-1:0] grp_act;
      assign grp_act = act[GRP*NGROUP +: NGROUP];
      assign sel[p][l] = grp_act[idx[p][l]];
    end
  end

endmodule
