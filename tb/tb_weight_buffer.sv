// tb_weight_buffer: writes random transformed-weight tile sets (OMEGA = 4, Q = 2) to all 32
// addresses, reads them back in random order, one per cycle, and checks each element one
// cycle after the read.
module tb_weight_buffer;
  import winocnn_pkg::*;
  localparam int OMEGA = 4, Q = 2, DEPTH = 32;

  logic clk = 0;
  always #5 clk = ~clk;

  logic wr_en, rd_en;
  logic [4:0] wr_addr, rd_addr;
  logic signed [WGT_W-1:0] wr_data [OMEGA][OMEGA][Q];
  logic signed [WGT_W-1:0] rd_data [OMEGA][OMEGA][Q];

  weight_buffer #(.OMEGA(OMEGA), .Q(Q), .DEPTH(DEPTH)) dut (.*);

  logic signed [WGT_W-1:0] model [DEPTH][OMEGA][OMEGA][Q];
  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    wr_en = 0; rd_en = 0; wr_addr = '0; rd_addr = '0;
    wr_data = '{default: '0};
    @(negedge clk);
    for (int d = 0; d < DEPTH; d++) begin
      for (int i = 0; i < OMEGA; i++)
        for (int j = 0; j < OMEGA; j++)
          for (int q = 0; q < Q; q++) begin
            wr_data[i][j][q] = WGT_W'($urandom);
            model[d][i][j][q] = wr_data[i][j][q];
          end
      wr_en = 1; wr_addr = 5'(d);
      @(negedge clk);
    end
    wr_en = 0;
    for (int t = 0; t < 100; t++) begin
      a = int'($urandom_range(DEPTH - 1));
      rd_en = 1; rd_addr = 5'(a);
      @(negedge clk);
      for (int i = 0; i < OMEGA; i++)
        for (int j = 0; j < OMEGA; j++)
          for (int q = 0; q < Q; q++) begin
            checks++;
            if (rd_data[i][j][q] !== model[a][i][j][q]) begin
              failures++;
              if (failures < 10) $display("FAIL addr %0d element %0d,%0d,%0d", a, i, j, q);
            end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
