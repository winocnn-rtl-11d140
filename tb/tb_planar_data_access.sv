// tb_planar_data_access: the planar data access unit with a 4 x 8 bank matrix, OMEGA = 4,
// N = 2 (the configuration of the paper's worked example). The buffer holds a 16 x 24
// feature map of 3 channel groups, pixel value = (g*32 + r)*32 + c, written through the
// address mapping. The test first requests the paper's example (rows 1..4, columns 3..8,
// m = 2), then 200 random requests back to back in random kernel modes, and checks that
// tile n, element (t, e) is pixel (r + t, c + n*m + e) of group g, that one tile set comes
// out per cycle, and that it comes 5 cycles after its request.
module tb_planar_data_access;
  import winocnn_pkg::*;
  localparam int OMEGA = 4, N = 2, HB = 4, WB = 8, DEPTH = 256, WORD_W = 16;
  localparam int IDG = 3, LOWB = 4, NREQ = 201;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  ksel_e ksel;
  logic [11:0] id_groups;
  logic [3:0]  low_bits;
  logic req_valid;
  logic [15:0] req_r, req_c;
  logic [11:0] req_g;
  tile_tag_t req_tag, tile_tag;
  logic rd_en, tile_valid;
  logic [7:0] rd_addr [HB][WB];
  logic [WORD_W-1:0] rd_data [HB][WB];
  logic [WORD_W-1:0] tiles [N][OMEGA][OMEGA];

  logic wr_en;
  logic [1:0] wr_h;
  logic [2:0] wr_w;
  logic [7:0] wr_addr;
  logic [WORD_W-1:0] wr_data;

  bram_buffer_matrix #(.HB(HB), .WB(WB), .DEPTH(DEPTH), .WORD_W(WORD_W)) u_buf (
    .clk, .wr_en, .wr_h, .wr_w, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data);

  planar_data_access #(.OMEGA(OMEGA), .N(N), .HB(HB), .WB(WB), .DEPTH(DEPTH), .WORD_W(WORD_W)) dut (.*);

  int checks = 0, failures = 0, cycle = 0, n_out = 0;
  int q_r [NREQ], q_c [NREQ], q_g [NREQ], q_m [NREQ], q_cyc [NREQ];
  ksel_e q_ks [NREQ];

  always @(posedge clk) cycle <= cycle + 1;

  function automatic int pix(int g, int r, int c);
    return (g * 32 + r) * 32 + c;
  endfunction

  always @(posedge clk) begin
    if (rst_n && tile_valid) begin
      int t;
      t = int'(tile_tag.out_addr);
      checks++;
      if (cycle - q_cyc[t] != 5) begin
        failures++;
        $display("FAIL request %0d latency %0d", t, cycle - q_cyc[t]);
      end
      for (int n = 0; n < N; n++)
        for (int a = 0; a < OMEGA; a++)
          for (int e = 0; e < OMEGA; e++) begin
            checks++;
            if (int'(tiles[n][a][e]) != pix(q_g[t], q_r[t] + a, q_c[t] + n * q_m[t] + e)) begin
              failures++;
              if (failures < 10)
                $display("FAIL req %0d (r=%0d c=%0d g=%0d m=%0d) tile %0d [%0d][%0d] = %0d", t, q_r[t],
                         q_c[t], q_g[t], q_m[t], n, a, e, tiles[n][a][e]);
            end
          end
      n_out++;
    end
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ksel = KS_3X3; id_groups = 12'(IDG); low_bits = 4'(LOWB);
    req_valid = 0; req_r = '0; req_c = '0; req_g = '0; req_tag = '0;
    wr_en = 0; wr_h = '0; wr_w = '0; wr_addr = '0; wr_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // load: 16 rows x 24 columns x 3 groups
    for (int g = 0; g < IDG; g++)
      for (int r = 0; r < 16; r++)
        for (int c = 0; c < 24; c++) begin
          wr_en = 1; wr_h = 2'(r % HB); wr_w = 3'(c % WB);
          wr_addr = 8'(in_addr(HB, WB, 16'(r), 16'(c), 12'(g), 12'(IDG), 4'(LOWB)));
          wr_data = WORD_W'(pix(g, r, c));
          @(negedge clk);
        end
    wr_en = 0;
    // the paper's example first, then random requests, grouped by kernel mode
    for (int t = 0; t < NREQ; t++) begin
      if (t == 0) begin
        q_ks[t] = KS_3X3; q_r[t] = 1; q_c[t] = 3; q_g[t] = 0;
      end else begin
        q_ks[t] = (t < 70) ? KS_1X1 : (t < 140) ? KS_3X3 : KS_3X3;
        q_r[t] = int'($urandom_range(16 - OMEGA));
        q_g[t] = int'($urandom_range(IDG - 1));
      end
      q_m[t] = int'(mtile(OMEGA, q_ks[t]));
      if (t != 0) q_c[t] = int'($urandom_range(24 - ((N - 1) * q_m[t] + OMEGA)));
      if (q_ks[t] != ksel) begin
        req_valid = 0;
        repeat (6) @(negedge clk);
        ksel = q_ks[t];
      end
      req_valid = 1;
      req_r = 16'(q_r[t]); req_c = 16'(q_c[t]); req_g = 12'(q_g[t]);
      req_tag = '{valid: 1'b1, first: 1'b0, last: 1'b0, out_addr: 16'(t)};
      q_cyc[t] = cycle;
      @(negedge clk);
    end
    req_valid = 0;
    repeat (8) @(negedge clk);
    checks++;
    if (n_out != NREQ) begin
      failures++;
      $display("FAIL %0d tile sets out, expected %0d", n_out, NREQ);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
