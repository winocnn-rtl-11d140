// bram_buffer_matrix: the input buffer, folded into an HB x WB matrix of independent banks.
//
// Each bank has its own address and data port, so one cycle can read HB*WB pixels, each
// from a different address. That is what lets the planar data access unit gather a whole
// omega x ((N-1)m + omega) block of the feature map in one cycle. Pixel (r, c) of channel
// group g lives in bank (r % HB, c % WB) at address concat(r / HB, (c / WB) * ID + g);
// the caller computes that address (winocnn_pkg::in_addr).
//
// One word holds Q input channels x B images of 8 bits (Q*B*8 bits). The paper's word holds
// B images only; widening it to Q channels is this design's choice, so that the Q channels
// a WinoPE multiplies per cycle arrive in one read.
//
// Interface: one write port (a single bank per cycle, from the loader) and HB*WB read
// ports with one common enable. Timing: synchronous read, data one cycle after rd_en.
module bram_buffer_matrix #(
  parameter int unsigned HB     = 8,
  parameter int unsigned WB     = 16,
  parameter int unsigned DEPTH  = 4096,
  parameter int unsigned WORD_W = 64,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                      clk,
  input  logic                      wr_en,
  input  logic [$clog2(HB)-1:0]     wr_h,
  input  logic [$clog2(WB)-1:0]     wr_w,
  input  logic [AW-1:0]             wr_addr,
  input  logic [WORD_W-1:0]         wr_data,
  input  logic                      rd_en,
  input  logic [AW-1:0]             rd_addr [HB][WB],
  output logic [WORD_W-1:0]         rd_data [HB][WB]
);

  for (genvar h = 0; h < HB; h++) begin : g_row
    for (genvar w = 0; w < WB; w++) begin : g_col
      logic [WORD_W-1:0] mem [DEPTH];

      always_ff @(posedge clk) begin
        if (wr_en && wr_h == h && wr_w == w) mem[wr_addr] <= wr_data;
        if (rd_en) rd_data[h][w] <= mem[rd_addr[h][w]];
      end
    end
  end

endmodule
