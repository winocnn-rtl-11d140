// planar_data_access: turns a tile-set request (row r, column c, channel group g) into N
// overlapping OMEGA x OMEGA input tiles read from the banked input buffer.
//
// The N tiles of one cycle start at columns c, c+m, ..., c+(N-1)m and together cover the
// block rows r..r+OMEGA-1, columns c..c+(N-1)m+OMEGA-1, which fits inside HB x WB banks,
// so every pixel of it sits in a different bank. For bank (h, w) the unit computes the one
// row r' in [r, r+HB) with r' % HB == h and the one column c' in [c, c+WB) with
// c' % WB == w, and reads address concat(r'/HB, (c'/WB)*IDG + g). The banks then hold the
// block rotated by (r % HB, c % WB). Three stages undo that, as in the paper:
//   stage 1  registers the HB x WB bank outputs (the "plane tile"),
//   stage 2  a row multiplexer per output row t picks bank row (r + t) % HB,
//   stage 3  a column multiplexer per tile column picks bank column (c + n*m + e) % WB.
// All multiplexer selects and addresses are computed from r, c, g and the tile size m at
// request time, so the window step (m depends on the kernel size) can change freely.
//
// Interface: req_* in, bank addresses out to bram_buffer_matrix, bank data back in, tiles
// out with the request's tag. Timing: fully pipelined, one request per cycle; tiles appear
// LAT = 5 cycles after the request (address register, bank read, stages 1-3).
// The address register before the banks is this design's choice; the rest follows the paper.
module planar_data_access
  import winocnn_pkg::*;
#(
  parameter int unsigned OMEGA  = 6,
  parameter int unsigned N      = 2,
  parameter int unsigned HB     = 8,
  parameter int unsigned WB     = 16,
  parameter int unsigned DEPTH  = 4096,
  parameter int unsigned WORD_W = 64,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned LAT   = 5
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration, static while a row block runs
  input  ksel_e             ksel,
  input  logic [11:0]       id_groups,
  input  logic [3:0]        low_bits,
  // request
  input  logic              req_valid,
  input  logic [15:0]       req_r,
  input  logic [15:0]       req_c,
  input  logic [11:0]       req_g,
  input  tile_tag_t         req_tag,
  // bank ports
  output logic              rd_en,
  output logic [AW-1:0]     rd_addr [HB][WB],
  input  logic [WORD_W-1:0] rd_data [HB][WB],
  // tiles
  output logic              tile_valid,
  output tile_tag_t         tile_tag,
  output logic [WORD_W-1:0] tiles [N][OMEGA][OMEGA]
);

  localparam int unsigned HW = $clog2(HB);
  localparam int unsigned WW = $clog2(WB);

  if (OMEGA > HB || N * OMEGA > WB) begin : g_size_check
    $error("planar_data_access: the input block does not fit the bank matrix");
  end

  typedef logic [HW-1:0] rsel_t [OMEGA];
  typedef logic [WW-1:0] csel_t [N][OMEGA];

  // ---- address generation and selects (request cycle, registered) ----
  logic [AW-1:0] addr_d [HB][WB];
  rsel_t         rsel_d;
  csel_t         csel_d;
  logic [15:0]   m;

  always_comb begin
    logic [15:0] rr, cc;
    logic [HW-1:0] r_mod;
    logic [WW-1:0] c_mod;
    m     = 16'(mtile(OMEGA, ksel));
    r_mod = req_r[HW-1:0];
    c_mod = req_c[WW-1:0];
    for (int h = 0; h < HB; h++) begin
      for (int w = 0; w < WB; w++) begin
        rr = req_r + 16'(HW'(HW'(h) - r_mod));
        cc = req_c + 16'(WW'(WW'(w) - c_mod));
        addr_d[h][w] = AW'(in_addr(HB, WB, rr, cc, req_g, id_groups, low_bits));
      end
    end
    for (int t = 0; t < OMEGA; t++) rsel_d[t] = HW'(r_mod + HW'(t));
    for (int n = 0; n < N; n++)
      for (int e = 0; e < OMEGA; e++)
        csel_d[n][e] = WW'(32'(c_mod) + 32'(n) * 32'(m) + 32'(e));
  end

  // pipeline of valid, tag and selects: index s = s cycles after the address register
  logic      vld [5];
  tile_tag_t tag [5];
  rsel_t     rsel [3];
  csel_t     csel [4];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < 5; s++) vld[s] <= 1'b0;
    end else begin
      vld[0] <= req_valid;
      for (int s = 1; s < 5; s++) vld[s] <= vld[s-1];
    end
  end

  always_ff @(posedge clk) begin
    rd_addr <= addr_d;
    tag[0]  <= req_tag;
    rsel[0] <= rsel_d;
    csel[0] <= csel_d;
    for (int s = 1; s < 5; s++) tag[s] <= tag[s-1];
    for (int s = 1; s < 3; s++) rsel[s] <= rsel[s-1];
    for (int s = 1; s < 4; s++) csel[s] <= csel[s-1];
  end

  assign rd_en = vld[0];

  // ---- stage 1: register the bank outputs (plane tile) ----
  logic [WORD_W-1:0] plane [HB][WB];
  always_ff @(posedge clk) plane <= rd_data;

  // ---- stage 2: row multiplexers (row plane tile) ----
  logic [WORD_W-1:0] row_plane [OMEGA][WB];
  always_ff @(posedge clk) begin
    for (int t = 0; t < OMEGA; t++) row_plane[t] <= plane[rsel[2][t]];
  end

  // ---- stage 3: column multiplexers (input tiles) ----
  always_ff @(posedge clk) begin
    for (int n = 0; n < N; n++)
      for (int t = 0; t < OMEGA; t++)
        for (int e = 0; e < OMEGA; e++)
          tiles[n][t][e] <= row_plane[t][csel[3][n][e]];
  end

  assign tile_valid = vld[4];
  assign tile_tag   = tag[4];

endmodule
