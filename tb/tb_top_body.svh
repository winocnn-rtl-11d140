// Shared body of the end-to-end accelerator testbenches (tb_winocnn_top, tb_winocnn_full).
// The including module defines the localparams OMEGA, M, N, Q, B, HB, WB, DIN, DOUT, DW,
// NLAYERS and the layer list, and instantiates winocnn_top as `dut` on the signals below.
//
// For each layer the testbench builds a random zero-padded input feature map (ID channels,
// B images) and random kernels of the target size, splits kernels larger than the native k
// into k x k parts, transforms every part to the Winograd domain (V = Gs g Gs^T, integer-
// scaled G), loads the input buffer and the weight buffers, and runs the layer one row block
// (RS output rows) at a time. The next row block is started right after the previous one
// finishes and the previous one's results are read from the idle output-buffer half while
// it runs (ping-pong). Every output pixel is compared with scale * direct convolution.
// Also checked: the start-to-done cycle count of every row block equals the number of tile
// sets plus the fixed pipeline latency, and each mechanism (every kernel mode, kernel
// split, accumulation over channel groups, output-buffer bypass, ping-pong overlap) occurs.

  typedef struct packed {
    int ks, id, od, ih, iw, pad, kh, kw, rs, vin, vw;
  } layer_t;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  layer_cfg_t cfg;
  logic start, busy, done, bypass_evt;
  logic in_wr_en;
  logic [15:0] in_wr_r, in_wr_c;
  logic [11:0] in_wr_g;
  logic [Q*B*8-1:0] in_wr_data;
  logic w_wr_en;
  logic [((M > 1) ? $clog2(M) : 1)-1:0] w_wr_row;
  logic [$clog2(DW)-1:0] w_wr_addr;
  logic signed [WGT_W-1:0] w_wr_data [OMEGA][OMEGA][Q];
  logic out_rd_en;
  logic [$clog2(DOUT)-1:0] out_rd_addr;
  logic signed [ACC_W-1:0] out_rd_data [M][N][OMEGA][OMEGA][B];

  int checks = 0, failures = 0, cycle = 0;
  int n_mode [3], n_split, n_accum, n_bypass, n_overlap, n_blocks;

  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (rst_n && bypass_evt) n_bypass++;

  // feature map, kernels and expected outputs of the current layer
  int fm [][][][];     // [channel][image][row][col], padded frame
  int wk [][][][];     // [od][id][row][col], target kernel
  longint ref_out [][][][];  // [od][image][row][col]

  function automatic void fail(string s);
    failures++;
    if (failures < 20) $display("FAIL %s", s);
  endfunction

  task automatic run_layer(layer_t L);
    int k, m, sh_n, sw_n, ihp, iwp, oh, ow, idg, odg, rt_n, ct_n, low_bits, lo_span, sc;
    int pend_rc;
    bit pend;
    k     = ks_k(L.ks);
    m     = OMEGA - k + 1;
    sh_n  = (L.kh + k - 1) / k;
    sw_n  = (L.kw + k - 1) / k;
    ihp   = L.ih + 2 * L.pad;
    iwp   = L.iw + 2 * L.pad;
    oh    = ihp - L.kh + 1;
    ow    = iwp - L.kw + 1;
    idg   = (L.id + Q - 1) / Q;
    odg   = (L.od + M - 1) / M;
    rt_n  = (L.rs + m - 1) / m;
    ct_n  = (ow + N * m - 1) / (N * m);
    sc    = scale(OMEGA);
    // columns read: up to ct_n*N*m + (sw_n-1)*k + OMEGA; give the low field room for them
    lo_span  = ((ct_n * N * m + sw_n * k + OMEGA + WB - 1) / WB + 1) * idg;
    low_bits = $clog2(lo_span);
    if (odg * rt_n * ct_n > DOUT || odg * sh_n * sw_n * idg > DW ||
        (((ihp + sh_n * k + OMEGA) / HB + 1) << low_bits) > DIN) begin
      fail("layer does not fit the buffers");
      return;
    end
    n_mode[L.ks]++;
    if (sh_n * sw_n > 1) n_split++;
    if (idg > 1) n_accum++;

    // ---- data ----
    fm = new[idg * Q];
    foreach (fm[c]) begin
      fm[c] = new[B];
      foreach (fm[c][b]) begin
        fm[c][b] = new[ihp + sh_n * k + OMEGA];
        foreach (fm[c][b][r]) begin
          fm[c][b][r] = new[ct_n * N * m + sw_n * k + OMEGA + WB];
          foreach (fm[c][b][r][x])
            fm[c][b][r][x] = (c < L.id && r >= L.pad && r < L.pad + L.ih && x >= L.pad && x < L.pad + L.iw)
                             ? int'($urandom_range(2 * L.vin)) - L.vin : 0;
        end
      end
    end
    wk = new[odg * M];
    foreach (wk[o]) begin
      wk[o] = new[idg * Q];
      foreach (wk[o][c]) begin
        wk[o][c] = new[sh_n * k];
        foreach (wk[o][c][r]) begin
          wk[o][c][r] = new[sw_n * k];
          foreach (wk[o][c][r][x])
            wk[o][c][r][x] = (o < L.od && c < L.id && r < L.kh && x < L.kw)
                             ? int'($urandom_range(2 * L.vw)) - L.vw : 0;
        end
      end
    end
    ref_out = new[L.od];
    foreach (ref_out[o]) begin
      ref_out[o] = new[B];
      foreach (ref_out[o][b]) begin
        ref_out[o][b] = new[oh];
        foreach (ref_out[o][b][y]) begin
          ref_out[o][b][y] = new[ow];
          foreach (ref_out[o][b][y][x]) begin
            longint s;
            s = 0;
            for (int c = 0; c < L.id; c++)
              for (int a = 0; a < L.kh; a++)
                for (int e = 0; e < L.kw; e++) s += fm[c][b][y + a][x + e] * wk[o][c][a][e];
            s *= sc;
            if (s > 131071) s = 131071;
            if (s < -131072) s = -131072;
            ref_out[o][b][y][x] = s;
          end
        end
      end
    end

    // ---- configuration ----
    cfg.ksel      = ksel_e'(L.ks);
    cfg.low_bits  = 4'(low_bits);
    cfg.r_base    = '0;
    cfg.od_groups = 12'(odg);
    cfg.id_groups = 12'(idg);
    cfg.row_tiles = 12'(rt_n);
    cfg.col_tiles = 12'(ct_n);
    cfg.split_h   = 4'(sh_n);
    cfg.split_w   = 4'(sw_n);

    // ---- load input buffer ----
    @(negedge clk);
    for (int g = 0; g < idg; g++)
      for (int r = 0; r < fm[0][0].size(); r++)
        for (int x = 0; x < fm[0][0][0].size(); x++) begin
          in_wr_en = 1'b1;
          in_wr_r  = 16'(r);
          in_wr_c  = 16'(x);
          in_wr_g  = 12'(g);
          for (int q = 0; q < Q; q++)
            for (int b = 0; b < B; b++) in_wr_data[(q * B + b) * 8 +: 8] = 8'(fm[g * Q + q][b][r][x]);
          @(negedge clk);
        end
    in_wr_en = 1'b0;

    // ---- load weight buffers: word ((odg*SH + sh)*SW + sw)*IDG + g ----
    for (int og = 0; og < odg; og++)
      for (int sh = 0; sh < sh_n; sh++)
        for (int sw = 0; sw < sw_n; sw++)
          for (int g = 0; g < idg; g++)
            for (int i = 0; i < M; i++) begin
              for (int q = 0; q < Q; q++) begin
                int gk [6][6];
                int v [6][6];
                gk = '{default: 0};
                for (int a = 0; a < k; a++)
                  for (int e = 0; e < k; e++) gk[a][e] = wk[og * M + i][g * Q + q][sh * k + a][sw * k + e];
                wtrans(OMEGA, L.ks, gk, v);
                for (int a = 0; a < OMEGA; a++)
                  for (int e = 0; e < OMEGA; e++) w_wr_data[a][e][q] = WGT_W'(v[a][e]);
              end
              w_wr_en   = 1'b1;
              w_wr_row  = $bits(w_wr_row)'(i);
              w_wr_addr = $bits(w_wr_addr)'(((og * sh_n + sh) * sw_n + sw) * idg + g);
              @(negedge clk);
            end
    w_wr_en = 1'b0;

    // ---- row blocks, ping-pong: drain block n while block n+1 computes ----
    pend = 0;
    for (int rc = 0; rc <= oh; rc += L.rs) begin
      int t0, tiles;
      bit run;
      run = rc < oh;
      if (run) begin
        cfg.r_base = 16'(rc);
        start = 1'b1;
        t0 = cycle;
        @(negedge clk);
        start = 1'b0;
      end
      if (pend) drain(L, pend_rc, m, odg, rt_n, ct_n, oh, ow, run);
      if (run) begin
        while (!done) @(negedge clk);
        tiles = odg * sh_n * sw_n * idg * rt_n * ct_n;
        checks++;
        if (cycle - t0 != tiles + 10 + M + N)
          fail($sformatf("row block %0d took %0d cycles, expected %0d", rc, cycle - t0, tiles + 10 + M + N));
        n_blocks++;
        pend = 1;
        pend_rc = rc;
        @(negedge clk);
      end
    end
  endtask

  task automatic drain(layer_t L, int rc, int m, int odg, int rt_n, int ct_n, int oh, int ow, bit overlapped);
    for (int og = 0; og < odg; og++)
      for (int rt = 0; rt < rt_n; rt++)
        for (int ct = 0; ct < ct_n; ct++) begin
          out_rd_en   = 1'b1;
          out_rd_addr = $bits(out_rd_addr)'((og * rt_n + rt) * ct_n + ct);
          @(negedge clk);
          out_rd_en = 1'b0;
          if (overlapped && busy) n_overlap++;
          for (int p = 0; p < M; p++)
            for (int qq = 0; qq < N; qq++)
              for (int i = 0; i < m; i++)
                for (int j = 0; j < m; j++)
                  for (int b = 0; b < B; b++) begin
                    int o, y, x;
                    o = og * M + p;
                    y = rc + rt * m + i;
                    x = (ct * N + qq) * m + j;
                    if (o < L.od && y < oh && y < rc + L.rs && x < ow) begin
                      checks++;
                      if (longint'(out_rd_data[p][qq][i][j][b]) != ref_out[o][b][y][x])
                        fail($sformatf("layer ks=%0d out[%0d][%0d][%0d][%0d] = %0d, expected %0d",
                                       L.ks, o, b, y, x, out_rd_data[p][qq][i][j][b], ref_out[o][b][y][x]));
                    end
                  end
        end
  endtask

  initial begin : watchdog
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0;
    start = 0;
    in_wr_en = 0; in_wr_r = '0; in_wr_c = '0; in_wr_g = '0; in_wr_data = '0;
    w_wr_en = 0; w_wr_row = '0; w_wr_addr = '0;
    w_wr_data = '{default: '0};
    out_rd_en = 0; out_rd_addr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    foreach (LAYERS[l]) run_layer(LAYERS[l]);
    $display("mechanisms: 1x1=%0d 3x3=%0d 5x5=%0d split=%0d accumulate=%0d bypass=%0d overlap=%0d row_blocks=%0d",
             n_mode[0], n_mode[1], n_mode[2], n_split, n_accum, n_bypass, n_overlap, n_blocks);
    checks += 6;
    if (n_mode[0] == 0) fail("1x1 mode never ran");
    if (n_mode[1] == 0) fail("3x3 mode never ran");
    if (OMEGA == 6 && n_mode[2] == 0) fail("5x5 mode never ran");
    if (n_split == 0) fail("kernel split never ran");
    if (n_accum == 0) fail("channel-group accumulation never ran");
    if (n_bypass == 0) fail("output buffer bypass never happened");
    if (n_overlap == 0) fail("ping-pong drain never overlapped compute");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
