// End-to-end test of the sparse accelerator at its default sizes
// (16 PEs, 64 activations per fetch, pruning groups of 16, 16 multipliers).
//
// For several small convolution layers it draws random activations and random
// weights pruned the accelerator-aware way (exactly NNZ non-zero weights in
// every pruning group of 16 channels), packs the non-zero weights with their
// direct indices into SB rows, loads NBin, runs the layer and compares every
// output in NBout with a dense reference convolution computed here. It also
// checks that a layer takes exactly issues + PIPE_LAT + 2 cycles, where each
// fetching group costs ceil(non-zeros per fetching group / NMUL) cycles.
// Mechanisms counted (each must occur): fetching groups needing several SB
// rows, padding-zero lanes, stride above 1, several channel chunks, several
// NBout slices, output saturation.
module tb_aap_accel;
  import aap_pkg::*;

  localparam int NPE = NPE_D, NPAR = NPAR_D, NGROUP = NGROUP_D, NMUL = NMUL_D;
  localparam int G = NPAR / NGROUP, LPG = NMUL / G, NSLICE = NPAR / NPE;
  localparam int IDXW = $clog2(NGROUP);
  localparam int DI = DEPTH_NBIN_D, DS = DEPTH_SB_D, DO = DEPTH_NBOUT_D;
  localparam int MAXC = 256, MAXM = 64, MAXK = 3, MAXHW = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                          nbin_wr_en = 0;
  logic [$clog2(DI)-1:0]         nbin_wr_addr;
  logic [NPAR-1:0][15:0]         nbin_wr_data;
  logic                          sb_wr_en = 0;
  logic [$clog2(NPE)-1:0]        sb_wr_pe;
  logic [$clog2(DS)-1:0]         sb_wr_addr;
  logic [NMUL-1:0][15:0]         sb_wr_wgt;
  logic [NMUL-1:0][IDXW-1:0]     sb_wr_idx;
  layer_cfg_t                    cfg;
  logic                          start = 0, busy, done;
  logic                          nbout_rd_en = 0;
  logic [$clog2(DO)-1:0]         nbout_rd_addr;
  logic [NPAR-1:0][15:0]         nbout_rd_data;

  aap_accel dut (.*);

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;
  int n_multirow = 0, n_padding = 0, n_stride = 0, n_chunks = 0, n_slices = 0, n_sat = 0;

  // Dense reference data.
  shortint act [MAXHW][MAXHW][MAXC];
  shortint wgt [MAXM][MAXK][MAXK][MAXC];

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic shortint rnd_val(int mag);
    int v;
    v = int'($urandom_range(2 * mag)) - mag;
    return shortint'(v);
  endfunction

  task automatic run_layer(int k, int s, int ow, int oh, int cch, int mblocks, int nnz, int shift);
    int iw, ih, c_n, m_n, r_n, orows, n_iss, t0, t1, exp_cyc;
    int pos [NGROUP];
    iw = (ow - 1) * s + k;  ih = (oh - 1) * s + k;
    c_n = cch * NPAR;  m_n = mblocks * NPE;
    r_n = (nnz * G + NMUL - 1) / NMUL;        // ceil(non-zeros per fetching group / NMUL)
    orows = (mblocks + NSLICE - 1) / NSLICE;
    if (ih * iw * cch > DI || mblocks * k * k * cch * r_n > DS || oh * ow * orows > DO)
      $fatal(1, "layer does not fit the buffers");

    // Activations.
    for (int h = 0; h < ih; h++) for (int w = 0; w < iw; w++) for (int c = 0; c < c_n; c++)
      act[h][w][c] = rnd_val(2047);
    // Weights: exactly nnz non-zero in every pruning group (random positions).
    for (int m = 0; m < m_n; m++) for (int i = 0; i < k; i++) for (int j = 0; j < k; j++)
      for (int g0 = 0; g0 < c_n; g0 += NGROUP) begin
        for (int q = 0; q < NGROUP; q++) pos[q] = q;
        for (int q = NGROUP - 1; q > 0; q--) begin
          int t, z;
          z = int'($urandom_range(q));
          t = pos[q]; pos[q] = pos[z]; pos[z] = t;
        end
        for (int q = 0; q < NGROUP; q++) wgt[m][i][j][g0 + q] = 0;
        for (int q = 0; q < nnz; q++) begin
          shortint v;
          do v = rnd_val(2047); while (v == 0);
          wgt[m][i][j][g0 + pos[q]] = v;
        end
      end

    // Load NBin: row = (h*iw + w)*cch + chunk.
    for (int h = 0; h < ih; h++) for (int w = 0; w < iw; w++) for (int cc = 0; cc < cch; cc++) begin
      logic [NPAR-1:0][15:0] row;
      for (int e = 0; e < NPAR; e++) row[e] = act[h][w][cc * NPAR + e];
      @(posedge clk);
      nbin_wr_en   <= 1;
      nbin_wr_addr <= ($clog2(DI))'((h * iw + w) * cch + cc);
      nbin_wr_data <= row;
    end
    @(posedge clk) nbin_wr_en <= 0;

    // Load SB: row (((b*k + i)*k + j)*cch + chunk)*R + r of PE p holds filter b*NPE+p.
    for (int b = 0; b < mblocks; b++) for (int p = 0; p < NPE; p++)
      for (int i = 0; i < k; i++) for (int j = 0; j < k; j++) for (int cc = 0; cc < cch; cc++)
        for (int r = 0; r < r_n; r++) begin
          logic [NMUL-1:0][15:0]     rw;
          logic [NMUL-1:0][IDXW-1:0] ri;
          for (int l = 0; l < NMUL; l++) begin
            int grp, want, found;
            grp  = l / LPG;
            want = r * LPG + (l % LPG);        // which non-zero of the group this lane carries
            found = 0;
            rw[l] = '0;
            ri[l] = IDXW'($urandom);           // index of a padding lane is irrelevant
            for (int q = 0; q < NGROUP; q++) begin
              if (wgt[b * NPE + p][i][j][cc * NPAR + grp * NGROUP + q] != 0) begin
                if (found == want) begin
                  rw[l] = wgt[b * NPE + p][i][j][cc * NPAR + grp * NGROUP + q];
                  ri[l] = IDXW'(q);
                end
                found++;
              end
            end
            if (want >= nnz) n_padding++;
          end
          @(posedge clk);
          sb_wr_en   <= 1;
          sb_wr_pe   <= ($clog2(NPE))'(p);
          sb_wr_addr <= ($clog2(DS))'((((b * k + i) * k + j) * cch + cc) * r_n + r);
          sb_wr_wgt  <= rw;
          sb_wr_idx  <= ri;
        end
    @(posedge clk) sb_wr_en <= 0;

    // Run.
    cfg.cch = 8'(cch); cfg.k = 4'(k); cfg.stride = 4'(s); cfg.in_w = 8'(iw);
    cfg.out_h = 8'(oh); cfg.out_w = 8'(ow); cfg.mblocks = 8'(mblocks);
    cfg.rows_per_fg = 4'(r_n); cfg.out_shift = 6'(shift);
    @(posedge clk) start <= 1;
    @(posedge clk) start <= 0;          // this edge samples start
    t0 = cycle;
    do @(posedge clk); while (!done);   // first edge at which done is seen
    t1 = cycle;
    n_iss = oh * ow * mblocks * k * k * cch * r_n;
    exp_cyc = n_iss + PIPE_LAT + 2;
    checks++;
    if ((t1 - t0) != exp_cyc) begin
      failures++;
      $display("FAIL cycles: got %0d expected %0d", (t1 - t0), exp_cyc);
    end
    if (r_n > 1) n_multirow++;
    if (s > 1) n_stride++;
    if (cch > 1) n_chunks++;
    if (mblocks > 1) n_slices++;

    // Compare.
    for (int y = 0; y < oh; y++) for (int x = 0; x < ow; x++) for (int orw = 0; orw < orows; orw++) begin
      @(posedge clk);
      nbout_rd_en   <= 1;
      nbout_rd_addr <= ($clog2(DO))'((y * ow + x) * orows + orw);
      @(posedge clk);
      nbout_rd_en   <= 0;
      @(negedge clk);
      for (int sl = 0; sl < NSLICE; sl++) begin
        int b;
        b = orw * NSLICE + sl;
        if (b < mblocks) for (int p = 0; p < NPE; p++) begin
          longint sum, sh;
          shortint expv;
          sum = 0;
          for (int i = 0; i < k; i++) for (int j = 0; j < k; j++) for (int c = 0; c < c_n; c++)
            sum += longint'(wgt[b * NPE + p][i][j][c]) * longint'(act[s * y + i][s * x + j][c]);
          sh = sum >>> shift;
          if (sh > 32767)       begin expv = 16'sh7fff; n_sat++; end
          else if (sh < -32768) begin expv = 16'sh8000; n_sat++; end
          else                  expv = shortint'(sh);
          checks++;
          if ($signed(nbout_rd_data[sl * NPE + p]) != expv) begin
            failures++;
            if (failures < 10)
              $display("FAIL y=%0d x=%0d m=%0d: got %0d expected %0d", y, x, b * NPE + p,
                       shortint'(nbout_rd_data[sl * NPE + p]), expv);
          end
        end
      end
    end
    $display("layer K=%0d S=%0d out=%0dx%0d C=%0d M=%0d nnz/group=%0d R=%0d: %0d cycles",
             k, s, oh, ow, c_n, m_n, nnz, r_n, (t1 - t0));
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 75 % pruning (12 of 16 pruned): one cycle per fetching group.
    run_layer(3, 1, 2, 2, 1, 2, 4, 14);
    // 50 % pruning: two SB rows per fetching group; two channel chunks; four NBout slices.
    run_layer(1, 1, 4, 4, 2, 4, 8, 14);
    // 87.5 % pruning with stride 2: lanes left as padding zeros.
    run_layer(3, 2, 2, 2, 1, 1, 2, 12);
    // Unpruned (dense): four SB rows per fetching group; small shift to saturate.
    run_layer(2, 1, 2, 2, 1, 1, 16, 6);

    if (n_multirow == 0) begin failures++; $display("FAIL: no multi-row fetching group"); end
    if (n_padding  == 0) begin failures++; $display("FAIL: no padding lane"); end
    if (n_stride   == 0) begin failures++; $display("FAIL: no stride > 1"); end
    if (n_chunks   == 0) begin failures++; $display("FAIL: no multi-chunk layer"); end
    if (n_slices   == 0) begin failures++; $display("FAIL: no multi-slice NBout"); end
    if (n_sat      == 0) begin failures++; $display("FAIL: no saturation"); end
    $display("mechanisms: multirow=%0d padding_lanes=%0d stride=%0d chunks=%0d slices=%0d saturations=%0d",
             n_multirow, n_padding, n_stride, n_chunks, n_slices, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
