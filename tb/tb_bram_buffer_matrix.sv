// tb_bram_buffer_matrix: fills a 4 x 8 bank matrix (depth 64) with random words through the
// single write port, then reads all banks in parallel at independent random addresses for
// 200 cycles and checks every bank's data one cycle later against a model. Also checks that
// data holds while rd_en is low.
module tb_bram_buffer_matrix;
  localparam int HB = 4, WB = 8, DEPTH = 64, WORD_W = 16;

  logic clk = 0;
  always #5 clk = ~clk;

  logic wr_en, rd_en;
  logic [1:0] wr_h;
  logic [2:0] wr_w;
  logic [5:0] wr_addr;
  logic [WORD_W-1:0] wr_data;
  logic [5:0] rd_addr [HB][WB];
  logic [WORD_W-1:0] rd_data [HB][WB];

  bram_buffer_matrix #(.HB(HB), .WB(WB), .DEPTH(DEPTH), .WORD_W(WORD_W)) dut (.*);

  logic [WORD_W-1:0] model [HB][WB][DEPTH];
  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [5:0] a [HB][WB];
    logic [WORD_W-1:0] hold [HB][WB];
    wr_en = 0; rd_en = 0; wr_h = '0; wr_w = '0; wr_addr = '0; wr_data = '0;
    rd_addr = '{default: '0};
    @(negedge clk);
    for (int h = 0; h < HB; h++)
      for (int w = 0; w < WB; w++)
        for (int d = 0; d < DEPTH; d++) begin
          wr_en = 1; wr_h = 2'(h); wr_w = 3'(w); wr_addr = 6'(d);
          wr_data = WORD_W'($urandom);
          model[h][w][d] = wr_data;
          @(negedge clk);
        end
    wr_en = 0;
    for (int t = 0; t < 200; t++) begin
      for (int h = 0; h < HB; h++)
        for (int w = 0; w < WB; w++) begin
          a[h][w] = 6'($urandom);
          rd_addr[h][w] = a[h][w];
        end
      rd_en = 1;
      @(negedge clk);
      for (int h = 0; h < HB; h++)
        for (int w = 0; w < WB; w++) begin
          checks++;
          if (rd_data[h][w] !== model[h][w][a[h][w]]) begin
            failures++;
            if (failures < 10) $display("FAIL bank %0d,%0d addr %0d", h, w, a[h][w]);
          end
        end
    end
    hold = rd_data;
    rd_en = 0;
    rd_addr = '{default: 6'd7};
    @(negedge clk);
    checks++;
    if (rd_data != hold) begin
      failures++;
      $display("FAIL data changed with rd_en low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
