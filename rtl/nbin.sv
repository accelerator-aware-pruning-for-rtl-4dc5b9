// NBin: input activation buffer.
//
// Each row holds one activation-fetching group: NPAR activations of one pixel
// along the channel axis. With NPAR=64 and 16-bit activations a row is
// 64 x 16 = 1024 bits, the narrow, more square memory that the pruning scheme
// allows in place of a 256 x 16-bit row. The controller reads one row per cycle
// and the row is broadcast to all PEs through the IM.
//
// Interface: one host write port (whole rows) and one read port. Timing:
// rd_data holds the row addressed in the cycle rd_en was high, from the next
// cycle on, and keeps it while rd_en is low. The row width follows the paper;
// the depth and the port arrangement are this design's own choice.
module nbin #(
  parameter int NPAR  = aap_pkg::NPAR_D,
  parameter int ABITS = aap_pkg::ABITS_D,
  parameter int DEPTH = aap_pkg::DEPTH_NBIN_D,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic                            clk,
  input  logic                            wr_en,
  input  logic [AW-1:0]                   wr_addr,
  input  logic [NPAR-1:0][ABITS-1:0]      wr_data,
  input  logic                            rd_en,
  input  logic [AW-1:0]                   rd_addr,
  output logic [NPAR-1:0][ABITS-1:0]      rd_data
);

  logic [NPAR*ABITS-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
