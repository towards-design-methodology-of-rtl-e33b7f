// deconv_tb_body.svh: end-to-end test body shared by the reduced-size and the
// full-size testbench of winograd_deconv_top.
//
// The including module declares localparams TM, TN, MAX_W, DEPTH, CT_MAX,
// NMAX_C (max input channels), MMAX (max output maps), HMAX, the DUT signals
// (clk initialised to 0) and the DUT instance, then includes this file. For each layer the body
// draws random input maps and K_D x K_D DeConv filters, prepares the TDC
// 3x3 filters (kind (sy,sx), tap (t,u) takes w[S(1-t)+sy+P][S(1-u)+sx+P],
// P = 2 for S = 2 and 1 for S = 1, zero outside the kernel), streams filters
// and inputs into the DUT with random gaps, and compares every output pixel
// with a direct transposed convolution:
//   out[o][y][x] = sum_c sum_{S*i+ky-P = y, S*j+kx-P = x} in[c][i][j] w[o][c][ky][kx]
// followed by saturation and optional ReLU.
//
// The reference is a direct transposed convolution, independent of TDC and
// Winograd; the TDC filter conversion (Fig. 3 of the paper) is done here, as
// the design expects converted filters.

  int checks = 0, failures = 0;
  int n_stall_in = 0, n_stall_out = 0, n_relu_clamp = 0, n_border = 0;
  int n_case1 = 0, n_case2 = 0, n_case3 = 0, n_s1 = 0, n_s2 = 0, n_groups = 0;

  always #5 clk = ~clk;

  int in_img [NMAX_C][HMAX][HMAX];
  int wk     [MMAX][NMAX_C][5][5];
  int gap_in, gap_out;   // percent of cycles a stream idles

  always @(posedge clk) begin
    if (stall_in)  n_stall_in++;
    if (stall_out) n_stall_out++;
  end

  function automatic int tdc_tap(int o, int c, int kd, int s, int kind, int t, int u);
    int p, ky, kx, sy, sx;
    p  = (s == 2) ? 2 : 1;
    sy = (s == 2) ? kind / 2 : 0;
    sx = (s == 2) ? kind % 2 : 0;
    ky = s * (1 - t) + sy + p;
    kx = s * (1 - u) + sx + p;
    if (ky < 0 || ky >= kd || kx < 0 || kx >= kd) return 0;
    return wk[o][c][ky][kx];
  endfunction

  function automatic int ref_out(int o, int y, int x, int kd, int s, int h, int w, int nc,
                                 logic relu, output logic clamped);
    int p, acc;
    p = (s == 2) ? 2 : 1;
    acc = 0;
    for (int c = 0; c < nc; c++)
      for (int i = 0; i < h; i++)
        for (int j = 0; j < w; j++) begin
          int ky, kx;
          ky = y + p - s * i;
          kx = x + p - s * j;
          if (ky >= 0 && ky < kd && kx >= 0 && kx < kd)
            acc += in_img[c][i][j] * wk[o][c][ky][kx];
        end
    clamped = relu && acc < 0;
    if (relu && acc < 0) acc = 0;
    if (acc > 32767) acc = 32767;
    if (acc < -32768) acc = -32768;
    return acc;
  endfunction

  task automatic run_layer(int kd, int s, int h, int w, int ct, int mgroups, logic relu,
                           int gi, int go);
    layer_cfg_t c;
    int nc, nk, kc;
    nc = ct * TN;
    nk = s * s;
    kc = (kd + s - 1) / s;
    gap_in = gi; gap_out = go;
    for (int ch = 0; ch < nc; ch++)
      for (int i = 0; i < h; i++)
        for (int j = 0; j < w; j++) in_img[ch][i][j] = int'($urandom_range(0, 15)) - 8;
    for (int o = 0; o < mgroups * TM; o++)
      for (int ch = 0; ch < nc; ch++)
        for (int a = 0; a < 5; a++)
          for (int b = 0; b < 5; b++)
            wk[o][ch][a][b] = (a < kd && b < kd) ? int'($urandom_range(0, 15)) - 8 : 0;
    c = '0;
    c.h_i = DIM_W'(h); c.w_i = DIM_W'(w); c.ct = 4'(ct); c.mgroups = 8'(mgroups);
    c.s = 2'(s); c.kc = 2'(kc); c.out_shift = 6'd2; c.relu_en = relu;
    for (int k = 0; k < nk; k++) begin
      int nz;
      nz = $countones(kind_mask(2'(kc), 2'(s), 2'(k)));
      if (nz == 16) n_case1++; else if (nz == 12) n_case2++; else if (nz == 9) n_case3++;
    end
    if (s == 1) n_s1++; else n_s2++;
    if (mgroups > 1) n_groups++;
    cfg = c;
    @(posedge clk); start <= 1'b1;
    @(posedge clk); start <= 1'b0;
    fork
      // filters: per group, map t, kind k, channel tile ci
      begin
        for (int g = 0; g < mgroups; g++)
          for (int t = 0; t < TM; t++)
            for (int k = 0; k < nk; k++)
              for (int ci = 0; ci < ct; ci++) begin
                logic [TN-1:0][8:0][DW-1:0] wbeat;
                for (int l = 0; l < TN; l++)
                  for (int tt = 0; tt < 3; tt++)
                    for (int u = 0; u < 3; u++)
                      wbeat[l][tt*3+u] = DW'(tdc_tap(g*TM+t, ci*TN+l, kd, s, k, tt, u));
                wt_data  <= wbeat;
                wt_valid <= 1'b1;
                do @(posedge clk); while (!wt_ready);
              end
        wt_valid <= 1'b0;
      end
      // inputs: per group, row, channel tile, column
      begin
        for (int g = 0; g < mgroups; g++)
          for (int y = 0; y < h; y++)
            for (int ci = 0; ci < ct; ci++)
              for (int x = 0; x < w; x++) begin
                logic [TN-1:0][DW-1:0] ibeat;
                if (int'($urandom_range(0, 99)) < gap_in) begin
                  in_valid <= 1'b0;
                  while (int'($urandom_range(0, 99)) < gap_in) @(posedge clk);
                  @(posedge clk);
                end
                for (int l = 0; l < TN; l++) ibeat[l] = DW'(in_img[ci*TN+l][y][x]);
                in_data  <= ibeat;
                in_valid <= 1'b1;
                do @(posedge clk); while (!in_ready);
              end
        in_valid <= 1'b0;
      end
      // outputs: per group, band, row, column
      for (int g = 0; g < mgroups; g++)
        for (int b = 0; b < h / 2; b++)
          for (int yl = 0; yl < 2 * s; yl++)
            for (int x = 0; x < s * w; x++) begin
              o_ready <= (int'($urandom_range(0, 99)) >= gap_out);
              @(posedge clk);
              while (!(o_valid && o_ready)) begin
                o_ready <= (int'($urandom_range(0, 99)) >= gap_out);
                @(posedge clk);
              end
              for (int t = 0; t < TM; t++) begin
                int exp_v, got;
                logic cl;
                exp_v = ref_out(g*TM+t, b*2*s+yl, x, kd, s, h, w, nc, relu, cl);
                got = int'($signed(o_data[t]));
                if (cl) n_relu_clamp++;
                if (yl == 0 && b == 0) n_border++;
                checks++;
                if (got !== exp_v) begin
                  failures++;
                  if (failures < 10)
                    $display("MISMATCH kd=%0d s=%0d map=%0d y=%0d x=%0d got=%0d exp=%0d",
                             kd, s, g*TM+t, b*2*s+yl, x, got, exp_v);
                end
              end
              if (o_last !== (yl == 2*s-1 && x == s*w-1)) begin
                failures++; $display("o_last wrong at y=%0d x=%0d", b*2*s+yl, x);
              end
              checks++;
            end
    join
    o_ready <= 1'b0;
    while (busy) @(posedge clk);
    checks++;
    if (o_valid) begin failures++; $display("extra output after layer"); end
  endtask

  task automatic report_mechanisms();
    // every mechanism must have happened at least once
    if (n_case1 == 0)      begin failures++; $display("no Case 1 (dense) kind seen"); end
    if (n_case2 == 0)      begin failures++; $display("no Case 2 kind seen"); end
    if (n_case3 == 0)      begin failures++; $display("no Case 3 kind seen"); end
    if (n_s1 == 0 || n_s2 == 0) begin failures++; $display("stride mode missing"); end
    if (n_relu_clamp == 0) begin failures++; $display("ReLU never clamped"); end
    if (n_border == 0)     begin failures++; $display("no border tile"); end
    $display("mechanisms: case1=%0d case2=%0d case3=%0d S1=%0d S2=%0d map_groups=%0d relu=%0d border=%0d stall_in=%0d stall_out=%0d",
             n_case1, n_case2, n_case3, n_s1, n_s2, n_groups, n_relu_clamp, n_border,
             n_stall_in, n_stall_out);
  endtask
