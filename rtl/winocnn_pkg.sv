// winocnn_pkg: types, widths and the constant Winograd transform matrices shared by the
// WinoCNN accelerator.
//
// The accelerator runs Winograd convolution F_w(m x m, k x k) with a fixed filter size
// w = m + k - 1 (OMEGA, 4 or 6). For one OMEGA the input transform B^T d B and the
// element-wise product are the same for every kernel size; only the output transform A^T
// changes, and it differs in a few "selection" entries s. The kernel mode (ksel_e) picks
// those entries.
//
// What follows the paper: B^T_4, A^T_4 and A^T_6 with their selection entries, G_4/G_6
// (used only by testbenches, since weights arrive already transformed), 8-bit input data,
// 16-bit transformed weights, 18-bit output buffer words, batch B = 2.
// Choices made here: B^T_6 is the standard Cook-Toom matrix for the points 0, +-1, +-2, inf
// (the paper prints no B^T_6); in A^T_4 the selection entry for 3x3 kernels is +1, because
// with the printed B^T_4 the printed value -1 does not give a correct convolution.
package winocnn_pkg;

  // Kernel mode. The output tile size is m = OMEGA - k + 1.
  typedef enum logic [1:0] {
    KS_1X1 = 2'd0,
    KS_3X3 = 2'd1,
    KS_5X5 = 2'd2
  } ksel_e;

  localparam int unsigned DATA_W = 8;   // input feature-map element
  localparam int unsigned WGT_W  = 16;  // transformed weight element
  localparam int unsigned ACC_W  = 18;  // output buffer element

  // Width of a transformed input element U = B^T d B. Row sums of |B^T| are at most 10
  // (OMEGA = 6), so |U| <= 100 * 128 and 16 bits hold it.
  localparam int unsigned U_W    = 16;
  localparam int unsigned PROD_W = U_W + WGT_W;

  function automatic int unsigned ksize(ksel_e ks);
    case (ks)
      KS_1X1:  return 1;
      KS_3X3:  return 3;
      default: return 5;
    endcase
  endfunction

  function automatic int unsigned mtile(int unsigned omega, ksel_e ks);
    return omega - ksize(ks) + 1;
  endfunction

  // Input transform matrix B^T (row i, column j).
  function automatic int bt(int unsigned omega, int unsigned i, int unsigned j);
    int b4 [4][4];
    int b6 [6][6];
    b4 = '{'{1, 0, -1, 0}, '{0, 1, 1, 0}, '{0, -1, 1, 0}, '{0, -1, 0, 1}};
    b6 = '{'{4, 0, -5, 0, 1, 0},
           '{0, -4, -4, 1, 1, 0},
           '{0, 4, -4, -1, 1, 0},
           '{0, -2, -1, 2, 1, 0},
           '{0, 2, -1, -2, 1, 0},
           '{0, 4, 0, -5, 0, 1}};
    if (omega == 4) return b4[i][j];
    return b6[i][j];
  endfunction

  // Selectable output transform matrix A^T_sel (row i, column j), OMEGA x OMEGA.
  // Only the first m rows are meaningful for a given kernel mode.
  function automatic int at(int unsigned omega, ksel_e ks, int unsigned i, int unsigned j);
    int a4 [4][4];
    int a6 [6][6];
    a4 = '{'{1, 1, 1, 0}, '{0, 1, -1, 0}, '{0, 1, 1, 0}, '{0, 1, -1, 1}};
    a6 = '{'{1, 1, 1, 1, 1, 0},
           '{0, 1, -1, 2, -2, 0},
           '{0, 1, 1, 4, 4, 0},
           '{0, 1, -1, 8, -8, 0},
           '{0, 1, 1, 16, 16, 0},
           '{0, 1, -1, 32, -32, 0}};
    if (omega == 4) begin
      if (i == 1 && j == 3) return (ks == KS_3X3) ? 1 : 0;   // s
      return a4[i][j];
    end
    if (j == 5) begin                                        // s0, s1, s2
      if (i == 1) return (ks == KS_5X5) ? 1 : 0;
      if (i == 3) return (ks == KS_3X3) ? 1 : 0;
      if (i == 5) return (ks == KS_1X1) ? 1 : 0;
    end
    return a6[i][j];
  endfunction

  // Sum of |A^T| over one row, the worst case: used to size the output transform.
  localparam int unsigned AT_GROWTH_W = 7;   // 67 < 2^7 for OMEGA = 6

  // Control information that travels with each tile set through the pipeline and down
  // the systolic columns.
  typedef struct packed {
    logic        valid;
    logic        first;      // first contribution to this output tile: overwrite
    logic        last;       // last tile set of the row block
    logic [15:0] out_addr;   // output buffer address of the tile
  } tile_tag_t;

  // Layer configuration for one row block (loop L0 iteration).
  typedef struct packed {
    ksel_e       ksel;        // kernel mode
    logic [3:0]  low_bits;    // width of the low field of the input buffer address
    logic [15:0] r_base;      // first input row of the block (padded-frame coordinates)
    logic [11:0] od_groups;   // ceil(OD / M)
    logic [11:0] id_groups;   // ceil(ID / Q)
    logic [11:0] row_tiles;   // ceil(RS / m)
    logic [11:0] col_tiles;   // ceil(OW / (N m))
    logic [3:0]  split_h;     // ceil(H_t / k): kernel split count, rows
    logic [3:0]  split_w;     // ceil(W_t / k): kernel split count, columns
  } layer_cfg_t;

  // Input buffer location of pixel (row r, column c, channel group g), Eq. (3):
  // bank (r % HB, c % WB), address concat(r / HB, (c / WB) * IDG + g).
  function automatic logic [31:0] in_addr(int unsigned hb, int unsigned wb, logic [15:0] r,
                                          logic [15:0] c, logic [11:0] g, logic [11:0] idg,
                                          logic [3:0] low_bits);
    logic [31:0] hi, lo;
    hi = 32'(r / 16'(hb));
    lo = 32'(c / 16'(wb)) * 32'(idg) + 32'(g);
    return (hi << low_bits) | lo;
  endfunction

endpackage
