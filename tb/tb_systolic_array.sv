// tb_systolic_array: a 2 x 3 array of F4 WinoPEs (Q = 1, B = 1) in 3x3 mode. Each cycle it
// feeds a random input tile per column and a random kernel per row (transformed in the
// testbench), over two passes on the same 10 output addresses: the first pass overwrites,
// the second accumulates. Each PE(i,j) must then hold 4 x (conv(d_j, g_i) summed over both
// passes), read from the idle half after the swap. Also checks that last_written comes
// (M-1) + (N-1) + 5 cycles after the last tile set enters.
module tb_systolic_array;
  import winocnn_pkg::*;
  import tb_wino_pkg::*;
  localparam int OMEGA = 4, M = 2, N = 3, Q = 1, B = 1, DOUT = 16, NT = 10, KS = 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  ksel_e ksel;
  tile_tag_t tag_top;
  logic signed [U_W-1:0]   u_top  [N][OMEGA][OMEGA][Q][B];
  logic signed [WGT_W-1:0] v_left [M][OMEGA][OMEGA][Q];
  logic swap, rd_en, last_written;
  logic [3:0] rd_addr;
  logic signed [ACC_W-1:0] rd_data [M][N][OMEGA][OMEGA][B];
  logic [M*N-1:0] bypass;

  systolic_array #(.OMEGA(OMEGA), .M(M), .N(N), .Q(Q), .B(B), .DOUT(DOUT)) dut (.*);

  int checks = 0, failures = 0, cycle = 0, last_issue = 0, lw_cycle = -1;
  longint expect_o [M][N][NT][2][2];

  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (rst_n && last_written) lw_cycle <= cycle;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d [N][OMEGA][OMEGA];
    int g [6][6];
    int v [6][6];
    int gk [M][3][3];
    ksel = ksel_e'(KS);
    tag_top = '0; swap = 0; rd_en = 0; rd_addr = '0;
    u_top = '{default: '0};
    v_left = '{default: '0};
    expect_o = '{default: 0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 2; pass++)
      for (int t = 0; t < NT; t++) begin
        for (int j = 0; j < N; j++) begin
          for (int a = 0; a < OMEGA; a++)
            for (int c = 0; c < OMEGA; c++) d[j][a][c] = int'($urandom_range(40)) - 20;
          for (int a = 0; a < OMEGA; a++)
            for (int c = 0; c < OMEGA; c++) begin
              int acc;
              acc = 0;
              for (int x = 0; x < OMEGA; x++)
                for (int z = 0; z < OMEGA; z++) acc += btr(OMEGA, a, x) * d[j][x][z] * btr(OMEGA, c, z);
              u_top[j][a][c][0][0] = U_W'(acc);
            end
        end
        for (int i = 0; i < M; i++) begin
          g = '{default: 0};
          for (int a = 0; a < 3; a++)
            for (int c = 0; c < 3; c++) begin
              g[a][c] = int'($urandom_range(10)) - 5;
              gk[i][a][c] = g[a][c];
            end
          wtrans(OMEGA, KS, g, v);
          for (int a = 0; a < OMEGA; a++)
            for (int c = 0; c < OMEGA; c++) v_left[i][a][c][0] = WGT_W'(v[a][c]);
        end
        for (int i = 0; i < M; i++)
          for (int j = 0; j < N; j++)
            for (int y = 0; y < 2; y++)
              for (int x = 0; x < 2; x++) begin
                longint s;
                s = 0;
                for (int a = 0; a < 3; a++)
                  for (int c = 0; c < 3; c++) s += 4 * d[j][y + a][x + c] * gk[i][a][c];
                expect_o[i][j][t][y][x] = (pass == 0) ? s : expect_o[i][j][t][y][x] + s;
              end
        tag_top = '{valid: 1'b1, first: pass == 0, last: pass == 1 && t == NT - 1, out_addr: 16'(t)};
        last_issue = cycle;
        @(negedge clk);
      end
    tag_top = '0;
    repeat (M + N + 8) @(negedge clk);
    checks++;
    if (lw_cycle - last_issue != (M - 1) + (N - 1) + 5) begin
      failures++;
      $display("FAIL last_written %0d cycles after the last issue", lw_cycle - last_issue);
    end
    swap = 1; @(negedge clk); swap = 0;
    for (int t = 0; t < NT; t++) begin
      rd_en = 1; rd_addr = 4'(t);
      @(negedge clk);
      rd_en = 0;
      for (int i = 0; i < M; i++)
        for (int j = 0; j < N; j++)
          for (int y = 0; y < 2; y++)
            for (int x = 0; x < 2; x++) begin
              checks++;
              if (longint'(rd_data[i][j][y][x][0]) != expect_o[i][j][t][y][x]) begin
                failures++;
                if (failures < 10) $display("FAIL PE(%0d,%0d) addr %0d [%0d][%0d] = %0d expected %0d",
                                            i, j, t, y, x, rd_data[i][j][y][x][0], expect_o[i][j][t][y][x]);
              end
            end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
