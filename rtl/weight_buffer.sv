// weight_buffer: buffer of Winograd-domain weights for one row of the systolic array.
//
// Each word is one transformed weight tile V (OMEGA x OMEGA elements) for Q input channels,
// 16 bits per element, so the PE row gets a full tile set in one read. Weights are written
// already transformed (V = G g G^T, done before they reach the chip). Depth 1024 follows the
// paper's resource model; the word ordering (one word per output-channel group, kernel split
// part and input-channel group, in loop order) is this design's choice.
//
// Timing: synchronous read, data one cycle after rd_en. One write port.
module weight_buffer
  import winocnn_pkg::*;
#(
  parameter int unsigned OMEGA = 6,
  parameter int unsigned Q     = 4,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                    clk,
  input  logic                    wr_en,
  input  logic [AW-1:0]           wr_addr,
  input  logic signed [WGT_W-1:0] wr_data [OMEGA][OMEGA][Q],
  input  logic                    rd_en,
  input  logic [AW-1:0]           rd_addr,
  output logic signed [WGT_W-1:0] rd_data [OMEGA][OMEGA][Q]
);

  localparam int unsigned WORD_W = OMEGA * OMEGA * Q * WGT_W;

  logic [WORD_W-1:0] mem [DEPTH];
  logic [WORD_W-1:0] wr_word, rd_word;

  always_comb begin
    for (int i = 0; i < OMEGA; i++)
      for (int j = 0; j < OMEGA; j++)
        for (int q = 0; q < Q; q++)
          wr_word[((i * OMEGA + j) * Q + q) * WGT_W +: WGT_W] = wr_data[i][j][q];
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_word;
    if (rd_en) rd_word <= mem[rd_addr];
  end

  always_comb begin
    for (int i = 0; i < OMEGA; i++)
      for (int j = 0; j < OMEGA; j++)
        for (int q = 0; q < Q; q++)
          rd_data[i][j][q] = rd_word[((i * OMEGA + j) * Q + q) * WGT_W +: WGT_W];
  end

endmodule
