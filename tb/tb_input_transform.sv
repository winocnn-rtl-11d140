// tb_input_transform: default size (OMEGA = 6, N = 2, Q = 4, B = 2). Streams 40 random tile
// sets of full-range 8-bit signed data, one per cycle, and checks every lane of every tile
// against B^T d B computed in the testbench, plus the one-cycle latency and tag passing.
module tb_input_transform;
  import winocnn_pkg::*;
  import tb_wino_pkg::*;
  localparam int OMEGA = 6, N = 2, Q = 4, B = 2, NT = 40;
  localparam int WORD_W = Q * B * 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  tile_tag_t in_tag, out_tag;
  logic [WORD_W-1:0] tiles [N][OMEGA][OMEGA];
  logic signed [U_W-1:0] u [N][OMEGA][OMEGA][Q][B];

  input_transform #(.OMEGA(OMEGA), .N(N), .Q(Q), .B(B)) dut (.*);

  int checks = 0, failures = 0, cycle = 0, n_out = 0;
  int expect_u [NT][N][OMEGA][OMEGA][Q][B];
  int issue [NT];

  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int t;
      t = int'(out_tag.out_addr);
      checks++;
      if (cycle - issue[t] != 1) begin
        failures++;
        $display("FAIL latency");
      end
      for (int n = 0; n < N; n++)
        for (int i = 0; i < OMEGA; i++)
          for (int j = 0; j < OMEGA; j++)
            for (int q = 0; q < Q; q++)
              for (int b = 0; b < B; b++) begin
                checks++;
                if (int'(u[n][i][j][q][b]) != expect_u[t][n][i][j][q][b]) begin
                  failures++;
                  if (failures < 10) $display("FAIL set %0d u[%0d][%0d][%0d][%0d][%0d]", t, n, i, j, q, b);
                end
              end
      n_out++;
    end
  end

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d [OMEGA][OMEGA];
    in_valid = 0; in_tag = '0;
    tiles = '{default: '0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < NT; t++) begin
      for (int n = 0; n < N; n++)
        for (int q = 0; q < Q; q++)
          for (int b = 0; b < B; b++) begin
            for (int i = 0; i < OMEGA; i++)
              for (int j = 0; j < OMEGA; j++) begin
                d[i][j] = (t == 0) ? ((i + j) % 2 == 0 ? 127 : -128) : int'($urandom_range(255)) - 128;
                tiles[n][i][j][(q * B + b) * 8 +: 8] = 8'(d[i][j]);
              end
            for (int i = 0; i < OMEGA; i++)
              for (int j = 0; j < OMEGA; j++) begin
                expect_u[t][n][i][j][q][b] = 0;
                for (int a = 0; a < OMEGA; a++)
                  for (int c = 0; c < OMEGA; c++)
                    expect_u[t][n][i][j][q][b] += btr(OMEGA, i, a) * d[a][c] * btr(OMEGA, j, c);
              end
          end
      in_valid = 1;
      in_tag = '{valid: 1'b1, first: 1'b0, last: 1'b0, out_addr: 16'(t)};
      issue[t] = cycle;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (n_out != NT) begin
      failures++;
      $display("FAIL %0d outputs", n_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
