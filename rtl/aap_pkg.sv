// Shared constants and types of the sparse channel-axis accelerator.
//
// The default sizes are those of the accelerator configuration that pairs with
// accelerator-aware pruning: 64 activations fetched per cycle (NPAR), pruning
// groups of 16 activations (NGROUP), 16 multipliers per PE (NMUL), 16 PEs (NPE)
// and 16-bit activations and weights. Buffer depths (DEPTH_*) and the
// accumulator width are this design's own choices; the layer descriptor
// layer_cfg_t and its field widths are also this design's own.
package aap_pkg;

  localparam int NPE_D     = 16;  // processing elements
  localparam int NPAR_D    = 64;  // activations per activation-fetching group
  localparam int NGROUP_D  = 16;  // activations per pruning group
  localparam int NMUL_D    = 16;  // multipliers per PE
  localparam int ABITS_D   = 16;  // activation width
  localparam int WBITS_D   = 16;  // weight width
  localparam int ACCBITS_D = 48;  // accumulator width
  localparam int DEPTH_NBIN_D  = 64;  // NBin rows   (64 x 64 x 16 bit = 8 KB)
  localparam int DEPTH_NBOUT_D = 64;  // NBout rows  (8 KB)
  localparam int DEPTH_SB_D    = 128; // SB rows per PE (128 x 16 x 20 bit = 5 KB)

  // Fixed latency from an issued fetch to the NBout write of the output it
  // finishes: memory read (1) + PE products (1) + adder tree (1) +
  // accumulator (1). The write itself lands on the following clock edge.
  localparam int PIPE_LAT = 4;

  // Layer descriptor written by the host before start.
  // A layer is a KxK convolution with stride S over an input of in_w columns
  // whose channels are split into cch chunks of NPAR channels; the output is
  // out_h x out_w positions times mblocks blocks of NPE filters.
  typedef struct packed {
    logic [7:0] cch;          // channel chunks per pixel, C/NPAR (>= 1)
    logic [3:0] k;            // kernel size K (>= 1)
    logic [3:0] stride;       // stride S (>= 1)
    logic [7:0] in_w;         // input columns W
    logic [7:0] out_h;        // output rows
    logic [7:0] out_w;        // output columns
    logic [7:0] mblocks;      // filter blocks of NPE filters, M/NPE (>= 1)
    logic [3:0] rows_per_fg;  // SB rows (cycles) per fetching group, R (>= 1)
    logic [5:0] out_shift;    // right shift applied before 16-bit saturation
  } layer_cfg_t;

  // Arithmetic right shift then saturation into a signed 16-bit word.
  function automatic logic signed [15:0] quantize16(logic signed [ACCBITS_D-1:0] acc,
                                                    logic [5:0] sh);
    logic signed [ACCBITS_D-1:0] s;
    s = acc >>> sh;
    if (s > 48'sd32767)       return 16'sh7fff;
    else if (s < -48'sd32768) return 16'sh8000;
    else                      return s[15:0];
  endfunction

endpackage
