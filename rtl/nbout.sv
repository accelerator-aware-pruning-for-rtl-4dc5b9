// NBout: output activation buffer.
//
// Rows have the same NPAR x ABITS width as NBin, so that a finished output
// row can later serve as an input row of the next layer. The NPE PEs finish
// NPE output activations (one per filter) together; they are written into one
// of the NPAR/NPE slices of a row. The host reads whole rows.
//
// Interface: slice write port from the datapath, row read port for the host.
// Timing: rd_data holds the row addressed in the cycle rd_en was high from the
// next cycle on. The row width follows the paper; the depth and the slice
// packing are this design's own choice.
module nbout #(
  parameter int NPAR  = aap_pkg::NPAR_D,
  parameter int NPE   = aap_pkg::NPE_D,
  parameter int ABITS = aap_pkg::ABITS_D,
  parameter int DEPTH = aap_pkg::DEPTH_NBOUT_D,
  localparam int AW     = $clog2(DEPTH),
  localparam int NSLICE = NPAR / NPE,
  localparam int SW     = (NSLICE > 1) ? $clog2(NSLICE) : 1
) (
  input  logic                            clk,
  input  logic                            wr_en,
  input  logic [AW-1:0]                   wr_addr,
  input  logic [SW-1:0]                   wr_slice,
  input  logic [NPE-1:0][ABITS-1:0]       wr_data,
  input  logic                            rd_en,
  input  logic [AW-1:0]                   rd_addr,
  output logic [NPAR-1:0][ABITS-1:0]      rd_data
);

  if (NPAR % NPE != 0) begin : g_bad
    $error("nbout: NPAR must be a multiple of NPE");
  end

  // One memory per slice, so that a slice write touches only its own bits.
  logic [NPE*ABITS-1:0] mem [NSLICE][DEPTH];

  for (genvar s = 0; s < NSLICE; s++) begin : g_slice
    always_ff @(posedge clk) begin
      if (wr_en && (NSLICE == 1 || wr_slice == SW'(s))) mem[s][wr_addr] <= wr_data;
      if (rd_en) rd_data[s*NPE +: NPE] <= mem[s][rd_addr];
    end
  end

endmodule
