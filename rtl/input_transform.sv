// input_transform ("itrans"): Winograd input transform U = B^T d B for N tiles.
//
// Each tile element is a word of Q input channels x B images of 8-bit signed data; the
// transform is applied to every (channel, image) lane separately. B^T has only small
// integer entries (0, +-1, +-2, +-4, +-5), so the transform is additions of scaled inputs
// with no DSP use. The same B^T serves every kernel size of one Winograd filter size OMEGA,
// which is why one transform unit per array column serves all kernel modes.
//
// Interface: N tiles in (with valid and tag), N transformed tiles out.
// Timing: one register stage, latency 1, one tile set per cycle.
module input_transform
  import winocnn_pkg::*;
#(
  parameter int unsigned OMEGA = 6,
  parameter int unsigned N     = 2,
  parameter int unsigned Q     = 4,
  parameter int unsigned B     = 2,
  localparam int unsigned WORD_W = Q * B * DATA_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  tile_tag_t             in_tag,
  input  logic [WORD_W-1:0]     tiles [N][OMEGA][OMEGA],
  output logic                  out_valid,
  output tile_tag_t             out_tag,
  output logic signed [U_W-1:0] u [N][OMEGA][OMEGA][Q][B]
);

  logic signed [U_W-1:0] u_d [N][OMEGA][OMEGA][Q][B];

  always_comb begin
    logic signed [U_W-1:0] d  [OMEGA][OMEGA];
    logic signed [U_W-1:0] t1 [OMEGA][OMEGA];
    logic signed [U_W-1:0] acc;
    for (int n = 0; n < N; n++) begin
      for (int q = 0; q < Q; q++) begin
        for (int b = 0; b < B; b++) begin
          for (int i = 0; i < OMEGA; i++)
            for (int j = 0; j < OMEGA; j++)
              d[i][j] = U_W'(signed'(tiles[n][i][j][(q * B + b) * DATA_W +: DATA_W]));
          // t1 = B^T d
          for (int i = 0; i < OMEGA; i++)
            for (int j = 0; j < OMEGA; j++) begin
              acc = '0;
              for (int k = 0; k < OMEGA; k++) acc += U_W'(bt(OMEGA, i, k)) * d[k][j];
              t1[i][j] = acc;
            end
          // u = t1 B = t1 (B^T)^T
          for (int i = 0; i < OMEGA; i++)
            for (int j = 0; j < OMEGA; j++) begin
              acc = '0;
              for (int k = 0; k < OMEGA; k++) acc += t1[i][k] * U_W'(bt(OMEGA, j, k));
              u_d[n][i][j][q][b] = acc;
            end
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    out_tag <= in_tag;
    u       <= u_d;
  end

endmodule
