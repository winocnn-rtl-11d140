// tb_winope: self-checking test of one WinoPE at the default size (OMEGA = 6, Q = 4, B = 2).
//
// For each kernel mode (1x1, 3x3, 5x5) it streams 12 random tile sets back to back: random
// 6x6 input tiles for Q channels and B images and random k x k kernels. The testbench
// transforms them itself (U = B^T d B, V = 24G g 24G^T) and expects each valid output
// element to equal 576 times the direct convolution summed over the Q channels. It also
// checks the 3-cycle latency, one result per cycle, and the one-cycle U/V forwarding.
module tb_winope;
  import winocnn_pkg::*;
  import tb_wino_pkg::*;

  localparam int OMEGA = 6, Q = 4, B = 2, NT = 12;
  localparam int Y_W = PROD_W + $clog2(Q) + 1 + 2 * AT_GROWTH_W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  ksel_e ksel;
  logic signed [U_W-1:0]   u_in  [OMEGA][OMEGA][Q][B], u_out [OMEGA][OMEGA][Q][B];
  logic signed [WGT_W-1:0] v_in  [OMEGA][OMEGA][Q],    v_out [OMEGA][OMEGA][Q];
  tile_tag_t tag_in, tag_out, y_tag;
  logic y_valid;
  logic signed [Y_W-1:0] y [OMEGA][OMEGA][B];

  winope #(.OMEGA(OMEGA), .Q(Q), .B(B)) dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  longint expect_y [NT][OMEGA][OMEGA][B];
  int issue_cycle [NT];
  int n_out;
  logic signed [U_W-1:0]   u_prev [OMEGA][OMEGA][Q][B];
  logic signed [WGT_W-1:0] v_prev [OMEGA][OMEGA][Q];
  logic prev_valid = 0;

  always @(posedge clk) cycle <= cycle + 1;

  // forwarding check: u_out / v_out equal the previous cycle's inputs
  always @(posedge clk) begin
    if (prev_valid) begin
      checks++;
      if (u_out != u_prev || v_out != v_prev || !tag_out.valid) begin
        failures++;
        $display("FAIL forward at cycle %0d", cycle);
      end
    end
    prev_valid <= tag_in.valid;
    u_prev <= u_in;
    v_prev <= v_in;
  end

  // result monitor
  always @(posedge clk) begin
    if (rst_n && y_valid) begin
      int t, m;
      t = int'(y_tag.out_addr);
      m = OMEGA - ks_k(int'(ksel)) + 1;
      checks++;
      if (cycle - issue_cycle[t] != 3) begin
        failures++;
        $display("FAIL latency %0d for set %0d", cycle - issue_cycle[t], t);
      end
      for (int i = 0; i < m; i++)
        for (int j = 0; j < m; j++)
          for (int b = 0; b < B; b++) begin
            checks++;
            if (longint'(y[i][j][b]) != expect_y[t][i][j][b]) begin
              failures++;
              if (failures < 10)
                $display("FAIL ks=%0d set %0d y[%0d][%0d][%0d]=%0d expected %0d", ksel, t, i, j, b,
                         y[i][j][b], expect_y[t][i][j][b]);
            end
          end
      n_out++;
    end
  end

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d [Q][B][6][6];
    int g [6][6];
    int v [6][6];
    int k, m;
    tag_in = '0;
    ksel = KS_1X1;
    u_in = '{default: '0};
    v_in = '{default: '0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int ks = 0; ks < 3; ks++) begin
      ksel = ksel_e'(ks);
      k = ks_k(ks);
      m = OMEGA - k + 1;
      n_out = 0;
      @(negedge clk);
      for (int t = 0; t < NT; t++) begin
        for (int i = 0; i < m; i++)
          for (int j = 0; j < m; j++)
            for (int b = 0; b < B; b++) expect_y[t][i][j][b] = 0;
        for (int q = 0; q < Q; q++) begin
          g = '{default: 0};
          for (int a = 0; a < k; a++)
            for (int c = 0; c < k; c++) g[a][c] = int'($urandom_range(6)) - 3;
          wtrans(OMEGA, ks, g, v);
          for (int i = 0; i < OMEGA; i++)
            for (int j = 0; j < OMEGA; j++) v_in[i][j][q] = WGT_W'(v[i][j]);
          for (int b = 0; b < B; b++) begin
            for (int i = 0; i < OMEGA; i++)
              for (int j = 0; j < OMEGA; j++) d[q][b][i][j] = int'($urandom_range(255)) - 128;
            // U = B^T d B
            for (int i = 0; i < OMEGA; i++)
              for (int j = 0; j < OMEGA; j++) begin
                int acc;
                acc = 0;
                for (int a = 0; a < OMEGA; a++)
                  for (int c = 0; c < OMEGA; c++) acc += btr(OMEGA, i, a) * d[q][b][a][c] * btr(OMEGA, j, c);
                u_in[i][j][q][b] = U_W'(acc);
              end
            // direct convolution
            for (int i = 0; i < m; i++)
              for (int j = 0; j < m; j++)
                for (int a = 0; a < k; a++)
                  for (int c = 0; c < k; c++)
                    expect_y[t][i][j][b] += longint'(scale(OMEGA)) * d[q][b][i+a][j+c] * g[a][c];
          end
        end
        tag_in = '{valid: 1'b1, first: 1'b0, last: 1'b0, out_addr: 16'(t)};
        issue_cycle[t] = cycle;
        @(negedge clk);
      end
      tag_in = '0;
      repeat (8) @(negedge clk);
      checks++;
      if (n_out != NT) begin
        failures++;
        $display("FAIL ks=%0d: %0d results, expected %0d", ks, n_out, NT);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
