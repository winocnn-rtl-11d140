// tb_output_buffer: OMEGA = 4, B = 2, depth 16. Checks, against a model of both halves:
// overwrite on `first`, accumulation otherwise, back-to-back results to the same address
// (the bypass path, whose events are counted), saturation at the 18-bit limits, the swap of
// halves and reading the idle half while the other one accumulates.
module tb_output_buffer;
  import winocnn_pkg::*;
  localparam int OMEGA = 4, B = 2, DEPTH = 16, Y_W = 48;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic swap, bank, in_valid, rd_en, bypass, last_written;
  tile_tag_t in_tag;
  logic signed [Y_W-1:0] y [OMEGA][OMEGA][B];
  logic [3:0] rd_addr;
  logic signed [ACC_W-1:0] rd_data [OMEGA][OMEGA][B];

  output_buffer #(.OMEGA(OMEGA), .B(B), .DEPTH(DEPTH), .Y_W(Y_W)) dut (.*);

  longint model [2][DEPTH][OMEGA][OMEGA][B];
  int checks = 0, failures = 0, n_bypass = 0, n_sat = 0, n_last = 0;
  int cb = 0;   // model of the compute bank

  always @(posedge clk) if (rst_n && bypass) n_bypass++;
  always @(posedge clk) if (rst_n && last_written) n_last++;

  function automatic longint sat(longint v);
    if (v > 131071) return 131071;
    if (v < -131072) return -131072;
    return v;
  endfunction

  task automatic push(int a, bit first, bit last, longint lo, longint hi);
    in_valid = 1;
    in_tag = '{valid: 1'b1, first: first, last: last, out_addr: 16'(a)};
    for (int i = 0; i < OMEGA; i++)
      for (int j = 0; j < OMEGA; j++)
        for (int b = 0; b < B; b++) begin
          longint v, s;
          v = lo + longint'($urandom_range(32'(hi - lo)));
          y[i][j][b] = Y_W'(v);
          s = first ? v : model[cb][a][i][j][b] + v;
          if (sat(s) != s) n_sat++;
          model[cb][a][i][j][b] = sat(s);
        end
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic check_idle_half(string what);
    for (int a = 0; a < DEPTH; a++) begin
      rd_en = 1; rd_addr = 4'(a);
      @(negedge clk);
      rd_en = 0;
      for (int i = 0; i < OMEGA; i++)
        for (int j = 0; j < OMEGA; j++)
          for (int b = 0; b < B; b++) begin
            checks++;
            if (longint'(rd_data[i][j][b]) != model[1 - cb][a][i][j][b]) begin
              failures++;
              if (failures < 10)
                $display("FAIL %s addr %0d [%0d][%0d][%0d] = %0d expected %0d", what, a, i, j, b,
                         rd_data[i][j][b], model[1 - cb][a][i][j][b]);
            end
          end
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    swap = 0; in_valid = 0; rd_en = 0; rd_addr = '0; in_tag = '0;
    y = '{default: '0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    // round 0: fill both halves' compute side with first writes, then accumulate
    for (int a = 0; a < DEPTH; a++) push(a, 1, 0, -1000, 1000);
    for (int r = 0; r < 3; r++)
      for (int a = 0; a < DEPTH; a++) push(a, 0, 0, -1000, 1000);       // spaced accumulation
    for (int a = 0; a < 4; a++)
      for (int r = 0; r < 4; r++) push(a, r == 0, 0, -5000, 5000);     // back to back, same address
    push(5, 1, 0, 100000, 131000);                                        // saturate high
    push(5, 0, 0, 100000, 131000);
    push(6, 1, 0, -131000, -100000);                                      // saturate low
    push(6, 0, 1, -131000, -100000);
    repeat (3) @(negedge clk);
    swap = 1; @(negedge clk); swap = 0; cb = 1 - cb;
    checks++;
    if (bank != 1'(cb)) begin failures++; $display("FAIL bank after swap"); end
    // drain round 0 while round 1 accumulates into the other half
    fork
      check_idle_half("drain of round 0");
      begin
        for (int a = 0; a < DEPTH; a++) push(a, 1, 0, -300, 300);
        for (int a = 0; a < DEPTH; a++) push(DEPTH - 1 - a, 0, 0, -300, 300);
      end
    join
    repeat (3) @(negedge clk);
    swap = 1; @(negedge clk); swap = 0; cb = 1 - cb;
    check_idle_half("drain of round 1");
    $display("bypass events %0d, saturated elements %0d", n_bypass, n_sat);
    checks += 3;
    if (n_bypass < 12) begin failures++; $display("FAIL bypass events %0d", n_bypass); end
    if (n_sat == 0) begin failures++; $display("FAIL saturation never exercised"); end
    if (n_last != 1) begin failures++; $display("FAIL last_written pulses %0d", n_last); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
