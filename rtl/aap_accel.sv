// Sparse channel-axis CNN accelerator for networks pruned with
// accelerator-aware pruning.
//
// Each cycle one activation-fetching group of NPAR=64 activations (one pixel,
// 64 input channels) is read from NBin and broadcast to NPE=16 PEs. Each PE
// works on its own filter: it reads one SB row of NMUL=16 non-zero weights,
// each with a 4-bit direct index; the IM picks, for every weight, one of the
// 16 activations of that weight's pruning group; the PE multiplies, sums the
// 16 products and accumulates. Because pruning leaves exactly the same number
// of non-zero weights in every pruning group, a fetching group always takes
// R = rows_per_fg cycles in every PE (R = 1 at 75 % pruning: 4 non-zero
// weights in each of the 4 groups, 16 in all), weights never straddle two
// fetching groups and no PE waits for another. When an output is complete its
// 16 results are shifted, saturated to 16 bits and written to an NBout slice.
//
// Host interface: NBin and SB row write ports, the layer descriptor cfg,
// start/busy/done and an NBout row read port; these stand in for the DMA and
// control processor of a full chip. Buffers must not be written while busy.
// Timing: a layer of N issues (out positions x filter blocks x K*K*cch*R)
// takes N + PIPE_LAT + 2 cycles from start to done.
// The datapath structure (buffers, IM with NGROUP-to-1 multiplexers, PEs with
// multipliers, adder tree and accumulator) and its default sizes follow the
// paper; the sequencing, buffer depths, pipelining and output quantisation
// are this design's own.
module aap_accel
  import aap_pkg::*;
#(
  parameter int NPE         = NPE_D,
  parameter int NPAR        = NPAR_D,
  parameter int NGROUP      = NGROUP_D,
  parameter int NMUL        = NMUL_D,
  parameter int DEPTH_NBIN  = DEPTH_NBIN_D,
  parameter int DEPTH_SB    = DEPTH_SB_D,
  parameter int DEPTH_NBOUT = DEPTH_NBOUT_D,
  localparam int ABITS  = ABITS_D,
  localparam int WBITS  = WBITS_D,
  localparam int IDXW   = $clog2(NGROUP),
  localparam int NSLICE = NPAR / NPE,
  localparam int SW     = (NSLICE > 1) ? $clog2(NSLICE) : 1,
  localparam int PW     = (NPE > 1) ? $clog2(NPE) : 1,
  localparam int IAW    = $clog2(DEPTH_NBIN),
  localparam int SAW    = $clog2(DEPTH_SB),
  localparam int OAW    = $clog2(DEPTH_NBOUT)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // NBin load
  input  logic                          nbin_wr_en,
  input  logic [IAW-1:0]                nbin_wr_addr,
  input  logic [NPAR-1:0][ABITS-1:0]    nbin_wr_data,
  // SB load
  input  logic                          sb_wr_en,
  input  logic [PW-1:0]                 sb_wr_pe,
  input  logic [SAW-1:0]                sb_wr_addr,
  input  logic [NMUL-1:0][WBITS-1:0]    sb_wr_wgt,
  input  logic [NMUL-1:0][IDXW-1:0]     sb_wr_idx,
  // control
  input  layer_cfg_t                    cfg,
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  // NBout read
  input  logic                          nbout_rd_en,
  input  logic [OAW-1:0]                nbout_rd_addr,
  output logic [NPAR-1:0][ABITS-1:0]    nbout_rd_data
);

  // ---------------- controller ----------------
  logic             iss_valid, iss_first, iss_last;
  logic [IAW-1:0]   iss_nbin_addr;
  logic [SAW-1:0]   iss_sb_addr;
  logic [OAW-1:0]   iss_out_addr;
  logic [SW-1:0]    iss_out_slice;
  logic [5:0]       out_shift_q;   // output shift of the running layer

  controller #(.NPE(NPE), .NPAR(NPAR), .DEPTH_NBIN(DEPTH_NBIN),
               .DEPTH_SB(DEPTH_SB), .DEPTH_NBOUT(DEPTH_NBOUT)) u_ctrl (
    .clk, .rst_n, .cfg, .start, .busy, .done,
    .iss_valid, .iss_first, .iss_last, .iss_nbin_addr, .iss_sb_addr,
    .iss_out_addr, .iss_out_slice
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  out_shift_q <= '0;
    else if (start && !busy)     out_shift_q <= cfg.out_shift;
  end

  // ---------------- buffers ----------------
  logic [NPAR-1:0][ABITS-1:0]           act_row;
  logic [NPE-1:0][NMUL-1:0][WBITS-1:0]  wgt_rows;
  logic [NPE-1:0][NMUL-1:0][IDXW-1:0]   idx_rows;

  nbin #(.NPAR(NPAR), .ABITS(ABITS), .DEPTH(DEPTH_NBIN)) u_nbin (
    .clk, .wr_en(nbin_wr_en), .wr_addr(nbin_wr_addr), .wr_data(nbin_wr_data),
    .rd_en(iss_valid), .rd_addr(iss_nbin_addr), .rd_data(act_row)
  );

  sb #(.NPE(NPE), .NMUL(NMUL), .NGROUP(NGROUP), .WBITS(WBITS), .DEPTH(DEPTH_SB)) u_sb (
    .clk, .wr_en(sb_wr_en), .wr_pe(sb_wr_pe), .wr_addr(sb_wr_addr),
    .wr_wgt(sb_wr_wgt), .wr_idx(sb_wr_idx),
    .rd_en(iss_valid), .rd_addr(iss_sb_addr), .rd_wgt(wgt_rows), .rd_idx(idx_rows)
  );

  // ---------------- IM ----------------
  logic [NPE-1:0][NMUL-1:0][ABITS-1:0]  sel_act;
  im #(.NPE(NPE), .NPAR(NPAR), .NGROUP(NGROUP), .NMUL(NMUL), .ABITS(ABITS)) u_im (
    .act(act_row), .idx(idx_rows), .sel(sel_act)
  );

  // Issue flags delayed one cycle to meet the memory read data.
  logic m_valid, m_first, m_last;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) {m_valid, m_first, m_last} <= '0;
    else        {m_valid, m_first, m_last} <= {iss_valid, iss_first, iss_last};
  end

  // ---------------- PEs ----------------
  logic [NPE-1:0]                  pe_valid;
  logic signed [ACCBITS_D-1:0]     pe_acc [NPE];

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    pe #(.NMUL(NMUL), .ABITS(ABITS), .WBITS(WBITS), .ACCBITS(ACCBITS_D)) u_pe (
      .clk, .rst_n,
      .in_valid(m_valid), .in_first(m_first), .in_last(m_last),
      .act(sel_act[p]), .wgt(wgt_rows[p]),
      .out_valid(pe_valid[p]), .acc(pe_acc[p])
    );
  end

  // ---------------- output write ----------------
  // NBout address and slice travel with the issue for PIPE_LAT cycles.
  logic [OAW-1:0] tag_addr  [PIPE_LAT];
  logic [SW-1:0]  tag_slice [PIPE_LAT];
  always_ff @(posedge clk) begin
    tag_addr[0]  <= iss_out_addr;
    tag_slice[0] <= iss_out_slice;
    for (int s = 1; s < PIPE_LAT; s++) begin
      tag_addr[s]  <= tag_addr[s-1];
      tag_slice[s] <= tag_slice[s-1];
    end
  end

  logic [NPE-1:0][ABITS-1:0] out_word;
  always_comb begin
    for (int p = 0; p < NPE; p++) out_word[p] = quantize16(pe_acc[p], out_shift_q);
  end

  nbout #(.NPAR(NPAR), .NPE(NPE), .ABITS(ABITS), .DEPTH(DEPTH_NBOUT)) u_nbout (
    .clk, .wr_en(pe_valid[0]), .wr_addr(tag_addr[PIPE_LAT-1]),
    .wr_slice(tag_slice[PIPE_LAT-1]), .wr_data(out_word),
    .rd_en(nbout_rd_en), .rd_addr(nbout_rd_addr), .rd_data(nbout_rd_data)
  );

  // All PEs run in lockstep: they finish their outputs in the same cycle.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
      pe_valid == '0 || pe_valid == '1);
  // The host may not load buffers while a layer runs.
  a_no_load_busy: assert property (@(posedge clk) disable iff (!rst_n)
      busy |-> !(nbin_wr_en || sb_wr_en));

endmodule
