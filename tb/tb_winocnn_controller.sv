// tb_winocnn_controller: OMEGA = 4, N = 2. Runs three configurations (3x3 with a 2 x 2
// kernel split and r_base = 8, 1x1 with several groups, and a minimal one) and compares
// every issued tile set (row, column, channel group, weight address, output address, first
// and last flags) with the loop nest written out in the testbench. Checks that issuing
// takes exactly the product of the loop counts in cycles, with busy high only then.
module tb_winocnn_controller;
  import winocnn_pkg::*;
  localparam int OMEGA = 4, N = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, iss_valid;
  layer_cfg_t cfg;
  logic [15:0] iss_r, iss_c;
  logic [11:0] iss_g;
  logic [9:0]  iss_waddr;
  tile_tag_t   iss_tag;

  winocnn_controller #(.OMEGA(OMEGA), .N(N), .WADDR_W(10)) dut (.*);

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int ks, int rb, int odg, int sh_n, int sw_n, int idg, int rt_n, int ct_n);
    int k, m, n, total, wa;
    k = (ks == 0) ? 1 : (ks == 1) ? 3 : 5;
    m = OMEGA - k + 1;
    cfg = '0;
    cfg.ksel = ksel_e'(ks); cfg.r_base = 16'(rb);
    cfg.od_groups = 12'(odg); cfg.split_h = 4'(sh_n); cfg.split_w = 4'(sw_n);
    cfg.id_groups = 12'(idg); cfg.row_tiles = 12'(rt_n); cfg.col_tiles = 12'(ct_n);
    start = 1;
    @(negedge clk);
    start = 0;
    n = 0;
    wa = 0;
    total = odg * sh_n * sw_n * idg * rt_n * ct_n;
    for (int o = 0; o < odg; o++)
      for (int sh = 0; sh < sh_n; sh++)
        for (int sw = 0; sw < sw_n; sw++)
          for (int g = 0; g < idg; g++) begin
            for (int rt = 0; rt < rt_n; rt++)
              for (int ct = 0; ct < ct_n; ct++) begin
                checks++;
                n++;
                if (!iss_valid || !busy || int'(iss_r) != rb + rt * m + sh * k || int'(iss_c) != ct * N * m + sw * k ||
                    int'(iss_g) != g || int'(iss_waddr) != wa ||
                    int'(iss_tag.out_addr) != (o * rt_n + rt) * ct_n + ct ||
                    iss_tag.first != (sh == 0 && sw == 0 && g == 0) || iss_tag.last != (n == total) ||
                    !iss_tag.valid) begin
                  failures++;
                  if (failures < 10)
                    $display("FAIL issue %0d: r=%0d c=%0d g=%0d wa=%0d oa=%0d first=%0d last=%0d", n, iss_r,
                             iss_c, iss_g, iss_waddr, iss_tag.out_addr, iss_tag.first, iss_tag.last);
                end
                @(negedge clk);
              end
            wa++;
          end
    checks++;
    if (busy || iss_valid) begin
      failures++;
      $display("FAIL still issuing after %0d tile sets", total);
    end
    repeat (2) @(negedge clk);
  endtask

  initial begin
    start = 0; cfg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run(1, 8, 2, 2, 2, 3, 2, 3);
    run(0, 0, 3, 1, 1, 4, 1, 2);
    run(0, 4, 1, 1, 7, 1, 1, 1);
    run(1, 0, 1, 1, 1, 1, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
