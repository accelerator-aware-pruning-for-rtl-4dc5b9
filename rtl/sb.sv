// SB: synapse (weight) buffer holding only the non-zero weights.
//
// There is one bank per PE. A row of a bank holds NMUL entries, each a
// non-zero weight and its direct index: the position, 0..NGROUP-1, of the
// activation it multiplies inside its pruning group. Entry (lane) l belongs
// to pruning group l / (NMUL/G) of the fetched activations, G = NPAR/NGROUP;
// a lane with no weight to carry holds weight 0 (a padding zero).
// Because accelerator-aware pruning leaves the same number of non-zero
// weights in every pruning group, every PE needs the same number of rows per
// fetching group, so all banks are read at one shared address in lockstep.
//
// Interface: host write of one row of one bank; shared read of all banks.
// Timing: rd_wgt/rd_idx hold the addressed rows from the cycle after rd_en.
// Storing a weight with a ceil(log2 NGROUP)-bit direct index follows the
// paper; depth, lane order and ports are this design's own choice.
module sb #(
  parameter int NPE    = aap_pkg::NPE_D,
  parameter int NMUL   = aap_pkg::NMUL_D,
  parameter int NGROUP = aap_pkg::NGROUP_D,
  parameter int WBITS  = aap_pkg::WBITS_D,
  parameter int DEPTH  = aap_pkg::DEPTH_SB_D,
  localparam int AW    = $clog2(DEPTH),
  localparam int PW    = (NPE > 1) ? $clog2(NPE) : 1,
  localparam int IDXW  = $clog2(NGROUP),
  localparam int EW    = WBITS + IDXW
) (
  input  logic                                  clk,
  input  logic                                  wr_en,
  input  logic [PW-1:0]                         wr_pe,
  input  logic [AW-1:0]                         wr_addr,
  input  logic [NMUL-1:0][WBITS-1:0]            wr_wgt,
  input  logic [NMUL-1:0][IDXW-1:0]             wr_idx,
  input  logic                                  rd_en,
  input  logic [AW-1:0]                         rd_addr,
  output logic [NPE-1:0][NMUL-1:0][WBITS-1:0]   rd_wgt,
  output logic [NPE-1:0][NMUL-1:0][IDXW-1:0]   rd_idx
);

  logic [NMUL*EW-1:0] wr_row;
  always_comb begin
    for (int l = 0; l < NMUL; l++) wr_row[l*EW +: EW] = {wr_wgt[l], wr_idx[l]};
  end

  for (genvar p = 0; p < NPE; p++) begin : g_bank
    logic [NMUL*EW-1:0] mem [DEPTH];
    logic [NMUL*EW-1:0] q;
    always_ff @(posedge clk) begin
      if (wr_en && wr_pe == PW'(p)) mem[wr_addr] <= wr_row;
      if (rd_en) q <= mem[rd_addr];
    end
    always_comb begin
      for (int l = 0; l < NMUL; l++) begin
        {rd_wgt[p][l], rd_idx[p][l]} = q[l*EW +: EW];
      end
    end
  end

endmodule
