// Controller: sequencer of one channel-axis convolution layer.
//
// For every output position (y, x) and every block of NPE filters, it walks
// the K x K kernel positions and, at each, the cch chunks of NPAR input
// channels. Each (i, j, chunk) is one activation-fetching group: one NBin row
// at pixel (S*y+i, S*x+j). For each fetching group it issues R = rows_per_fg
// consecutive cycles that reread the same NBin row and step through R SB rows,
// so a group with R*NMUL non-zero weights takes R cycles. With accelerator-
// aware pruning R is the same for every group and every PE, so all PEs run in
// lockstep and no PE waits for another.
//
// Loop order, innermost first: SB row r, channel chunk, kernel column j,
// kernel row i, filter block, output column x, output row y.
// NBin row      = ((S*y+i)*in_w + (S*x+j))*cch + chunk
// SB row        = running count of issues since the start of position (y,x)
//                 (filter block b uses rows b*K*K*cch*R ... )
// NBout row     = (y*out_w + x)*ceil(mblocks/NSLICE) + b/NSLICE,
// NBout slice   = b mod NSLICE, NSLICE = NPAR/NPE.
//
// Interface: cfg is sampled on start (a one-cycle pulse while idle). busy is
// high from the cycle after start until done, a one-cycle pulse PIPE_LAT+2
// cycles after the last issue, once the last NBout write has landed. A layer
// of N issues therefore takes N + PIPE_LAT + 2 cycles from start to done. The
// issue outputs are valid in the cycle iss_valid is high and address the
// memories directly. The whole sequencer is this design's own: the paper
// gives only the rule of R cycles per fetching group. The out_shift field of
// the registered descriptor is not read here; the top applies it.
module controller
  import aap_pkg::*;
#(
  parameter int NPE         = NPE_D,
  parameter int NPAR        = NPAR_D,
  parameter int DEPTH_NBIN  = DEPTH_NBIN_D,
  parameter int DEPTH_SB    = DEPTH_SB_D,
  parameter int DEPTH_NBOUT = DEPTH_NBOUT_D,
  localparam int NSLICE = NPAR / NPE,
  localparam int SW     = (NSLICE > 1) ? $clog2(NSLICE) : 1,
  localparam int IAW    = $clog2(DEPTH_NBIN),
  localparam int SAW    = $clog2(DEPTH_SB),
  localparam int OAW    = $clog2(DEPTH_NBOUT)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  layer_cfg_t       cfg,
  input  logic             start,
  output logic             busy,
  output logic             done,
  output logic             iss_valid,
  output logic             iss_first,   // first issue of an output
  output logic             iss_last,    // last issue of an output
  output logic [IAW-1:0]   iss_nbin_addr,
  output logic [SAW-1:0]   iss_sb_addr,
  output logic [OAW-1:0]   iss_out_addr,
  output logic [SW-1:0]    iss_out_slice
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_t;
  state_t state;

  layer_cfg_t c;
  logic [3:0] r, i, j;
  logic [7:0] cc, mb, x, y;
  logic [SAW-1:0] sb_ptr;
  logic [3:0] drain_cnt;

  logic last_r, last_cc, last_j, last_i, last_mb, last_x, last_y;
  assign last_r  = (r  == c.rows_per_fg - 4'd1);
  assign last_cc = (cc == c.cch - 8'd1);
  assign last_j  = (j  == c.k - 4'd1);
  assign last_i  = (i  == c.k - 4'd1);
  assign last_mb = (mb == c.mblocks - 8'd1);
  assign last_x  = (x  == c.out_w - 8'd1);
  assign last_y  = (y  == c.out_h - 8'd1);

  logic fg_done_output;  // this issue finishes the current output
  assign fg_done_output = last_r && last_cc && last_j && last_i;

  // Address arithmetic.
  logic [15:0] h_in, w_in, pix;
  logic [7:0]  orows;
  logic [15:0] opos;
  always_comb begin
    h_in  = 16'(c.stride) * 16'(y) + 16'(i);
    w_in  = 16'(c.stride) * 16'(x) + 16'(j);
    pix   = h_in * 16'(c.in_w) + w_in;
    orows = 8'((16'(c.mblocks) + 16'(NSLICE) - 16'd1) / 16'(NSLICE));
    opos  = 16'(y) * 16'(c.out_w) + 16'(x);
  end

  assign iss_valid     = (state == S_RUN);
  assign iss_first     = (r == 4'd0) && (cc == 8'd0) && (j == 4'd0) && (i == 4'd0);
  assign iss_last      = fg_done_output;
  assign iss_nbin_addr = IAW'(pix * 16'(c.cch) + 16'(cc));
  assign iss_sb_addr   = sb_ptr;
  assign iss_out_addr  = OAW'(opos * 16'(orows) + 16'(mb) / 16'(NSLICE));
  assign iss_out_slice = SW'(16'(mb) % 16'(NSLICE));

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      c         <= '0;
      {r, i, j} <= '0;
      {cc, mb, x, y} <= '0;
      sb_ptr    <= '0;
      drain_cnt <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          c      <= cfg;
          state  <= S_RUN;
          {r, i, j} <= '0;
          {cc, mb, x, y} <= '0;
          sb_ptr <= '0;
        end
        S_RUN: begin
          sb_ptr <= sb_ptr + SAW'(1);
          if (!last_r) r <= r + 4'd1;
          else begin
            r <= '0;
            if (!last_cc) cc <= cc + 8'd1;
            else begin
              cc <= '0;
              if (!last_j) j <= j + 4'd1;
              else begin
                j <= '0;
                if (!last_i) i <= i + 4'd1;
                else begin
                  i <= '0;
                  if (!last_mb) mb <= mb + 8'd1;
                  else begin
                    mb     <= '0;
                    sb_ptr <= '0;   // SB holds the same filters for every position
                    if (!last_x) x <= x + 8'd1;
                    else begin
                      x <= '0;
                      if (!last_y) y <= y + 8'd1;
                      else begin
                        y         <= '0;
                        state     <= S_DRAIN;
                        drain_cnt <= 4'(PIPE_LAT);
                      end
                    end
                  end
                end
              end
            end
          end
        end
        S_DRAIN: begin
          if (drain_cnt == 4'd0) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            drain_cnt <= drain_cnt - 4'd1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A layer descriptor with a zero loop bound would never finish.
  a_cfg_sane: assert property (@(posedge clk) disable iff (!rst_n)
      (state == S_IDLE && start) |->
      (cfg.cch != 0 && cfg.k != 0 && cfg.stride != 0 && cfg.out_h != 0 &&
       cfg.out_w != 0 && cfg.mblocks != 0 && cfg.rows_per_fg != 0));

endmodule
