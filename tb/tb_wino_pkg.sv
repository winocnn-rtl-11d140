// tb_wino_pkg: reference arithmetic for the WinoCNN testbenches, written independently of
// the RTL's transform code.
//
// gs()  : weight transform matrix G scaled to integers (2*G for OMEGA = 4, 24*G for
//         OMEGA = 6), so V = gs g gs^T is exact and the accelerator's result is
//         scale(OMEGA) = (2 or 24)^2 times the plain convolution.
// btr() : input transform matrix B^T.
// Both are copied from the printed Winograd matrices (B^T_6 is the Cook-Toom matrix for the
// points 0, +-1, +-2, infinity). The checks compare against direct convolution, never
// against these transforms run backwards.
package tb_wino_pkg;

  function automatic int scale(int omega);
    return (omega == 4) ? 4 : 576;
  endfunction

  function automatic int ks_k(int ks);
    return (ks == 0) ? 1 : (ks == 1) ? 3 : 5;
  endfunction

  function automatic int btr(int omega, int i, int j);
    int b4 [4][4];
    int b6 [6][6];
    b4 = '{'{1, 0, -1, 0}, '{0, 1, 1, 0}, '{0, -1, 1, 0}, '{0, -1, 0, 1}};
    b6 = '{'{4, 0, -5, 0, 1, 0}, '{0, -4, -4, 1, 1, 0}, '{0, 4, -4, -1, 1, 0},
           '{0, -2, -1, 2, 1, 0}, '{0, 2, -1, -2, 1, 0}, '{0, 4, 0, -5, 0, 1}};
    return (omega == 4) ? b4[i][j] : b6[i][j];
  endfunction

  // scaled G, row i (0..omega-1), column j (0..k-1), kernel mode ks (0: 1x1, 1: 3x3, 2: 5x5)
  function automatic int gs(int omega, int ks, int i, int j);
    int g4 [4][3];
    int g6 [6][5];
    g4 = '{'{2, 0, 0}, '{1, 1, 1}, '{1, -1, 1}, '{0, 0, 2}};
    g6 = '{'{6, 0, 0, 0, 0}, '{-4, -4, -4, -4, -4}, '{-4, 4, -4, 4, -4},
           '{1, 2, 4, 8, 16}, '{1, -2, 4, -8, 16}, '{0, 0, 0, 0, 0}};
    if (omega == 4) begin
      if (i == 3 && j == 0) return (ks == 0) ? 2 : 0;   // s
      return g4[i][j];
    end
    if (i == 5) begin                                    // s0, s1, s2
      if (j == 0) return (ks == 0) ? 24 : 0;
      if (j == 2) return (ks == 1) ? 24 : 0;
      if (j == 4) return (ks == 2) ? 24 : 0;
      return 0;
    end
    return g6[i][j];
  endfunction

  // V = gs g gs^T for one k x k kernel stored in g[0:k-1][0:k-1]
  function automatic void wtrans(int omega, int ks, const ref int g [6][6], ref int v [6][6]);
    int k, t [6][6];
    k = ks_k(ks);
    for (int i = 0; i < omega; i++)
      for (int j = 0; j < k; j++) begin
        t[i][j] = 0;
        for (int a = 0; a < k; a++) t[i][j] += gs(omega, ks, i, a) * g[a][j];
      end
    for (int i = 0; i < omega; i++)
      for (int j = 0; j < omega; j++) begin
        v[i][j] = 0;
        for (int a = 0; a < k; a++) v[i][j] += t[i][a] * gs(omega, ks, j, a);
      end
  endfunction

endpackage
