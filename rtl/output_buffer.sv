// output_buffer: the ping-pong accumulation buffer attached to one WinoPE.
//
// It holds partial output tiles: OMEGA x OMEGA elements x B images, 18 bits each, per
// address. While one half (the compute bank) accumulates the PE's results, the other half
// can be read out to external memory; `swap` exchanges the two halves.
// An incoming result Y either starts a tile (first: the word is overwritten) or is added to
// the stored partial sum (read-modify-write). Sums saturate at the 18-bit range.
// If two consecutive results go to the same address, the second would read the word before
// the first has been written back; the buffer then forwards the freshly computed sum
// (a bypass), reported on `bypass`.
//
// Paper: per-PE OMEGA x OMEGA buffer matrix, 18-bit words, batch B, depth D_out, two
// buffers for ping-pong access, "+=" accumulation (out[...] += Y).
// This design's choice: saturation, the bypass path, the two-cycle read-modify-write.
//
// Timing: a result is written 2 cycles after it arrives; one result per cycle.
// The drain port reads the non-compute bank, data one cycle after rd_en.
module output_buffer
  import winocnn_pkg::*;
#(
  parameter int unsigned OMEGA = 6,
  parameter int unsigned B     = 2,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned Y_W   = 48,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  swap,
  output logic                  bank,
  // results from the PE
  input  logic                  in_valid,
  input  tile_tag_t             in_tag,
  input  logic signed [Y_W-1:0] y [OMEGA][OMEGA][B],
  // drain port (non-compute bank)
  input  logic                  rd_en,
  input  logic [AW-1:0]         rd_addr,
  output logic signed [ACC_W-1:0] rd_data [OMEGA][OMEGA][B],
  // events
  output logic                  bypass,
  output logic                  last_written
);

  localparam int unsigned EL     = OMEGA * OMEGA * B;
  localparam int unsigned WORD_W = EL * ACC_W;

  logic [WORD_W-1:0] mem [2 * DEPTH];

  // ---- stage A: read the stored partial sum ----
  logic                  v_q, first_q, last_q, bank_q;
  logic [AW-1:0]         addr_q;
  logic signed [Y_W-1:0] y_q [OMEGA][OMEGA][B];
  logic [WORD_W-1:0]     old_q, fwd_q, new_word;
  logic                  fwd_hit_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bank         <= 1'b0;
      v_q          <= 1'b0;
      fwd_hit_q    <= 1'b0;
      last_written <= 1'b0;
    end else begin
      if (swap) bank <= ~bank;
      v_q          <= in_valid;
      // the word being written now is the one the current read wants
      fwd_hit_q    <= in_valid && v_q && bank_q == bank && addr_q == in_tag.out_addr[AW-1:0];
      last_written <= v_q && last_q;
    end
  end

  always_ff @(posedge clk) begin
    old_q   <= mem[{bank, in_tag.out_addr[AW-1:0]}];
    addr_q  <= in_tag.out_addr[AW-1:0];
    first_q <= in_tag.first;
    last_q  <= in_tag.last;
    bank_q  <= bank;
    y_q     <= y;
    fwd_q   <= new_word;
  end

  // ---- stage B: accumulate and write back ----
  always_comb begin
    logic [WORD_W-1:0]       old_w;
    logic signed [Y_W:0]     sum;
    logic signed [ACC_W-1:0] sat;
    old_w = fwd_hit_q ? fwd_q : old_q;
    for (int i = 0; i < OMEGA; i++)
      for (int j = 0; j < OMEGA; j++)
        for (int b = 0; b < B; b++) begin
          sum = (Y_W+1)'(y_q[i][j][b]);
          if (!first_q)
            sum += (Y_W+1)'(signed'(old_w[((i * OMEGA + j) * B + b) * ACC_W +: ACC_W]));
          if (sum > (Y_W+1)'(2 ** (ACC_W - 1) - 1))  sat = {1'b0, {(ACC_W-1){1'b1}}};
          else if (sum < -(Y_W+1)'(2 ** (ACC_W - 1))) sat = {1'b1, {(ACC_W-1){1'b0}}};
          else                                        sat = ACC_W'(sum);
          new_word[((i * OMEGA + j) * B + b) * ACC_W +: ACC_W] = sat;
        end
  end

  always_ff @(posedge clk) begin
    if (v_q) mem[{bank_q, addr_q}] <= new_word;
  end

  assign bypass = v_q && fwd_hit_q;

  // ---- drain port ----
  logic [WORD_W-1:0] rd_word;
  always_ff @(posedge clk) begin
    if (rd_en) rd_word <= mem[{~bank, rd_addr}];
  end

  always_comb begin
    for (int i = 0; i < OMEGA; i++)
      for (int j = 0; j < OMEGA; j++)
        for (int b = 0; b < B; b++)
          rd_data[i][j][b] = signed'(rd_word[((i * OMEGA + j) * B + b) * ACC_W +: ACC_W]);
  end

endmodule
