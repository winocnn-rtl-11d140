// winope: the kernel-sharing Winograd processing element (WinoPE).
//
// Per cycle it takes a transformed input tile set U (OMEGA x OMEGA elements, Q input
// channels, B images) from above and a transformed weight tile set V (OMEGA x OMEGA, Q
// channels, shared by the B images) from the left, and
//   1. multiplies them element-wise: OMEGA^2 * Q * B multipliers (the DSPs),
//   2. sums the products over the Q channels with an adder tree,
//   3. applies the output transform Y = A^T_sel E A_sel for each image.
// A^T_sel differs between kernel sizes only in its selection entries s (winocnn_pkg::at),
// so the multipliers and the input path are shared by all kernel sizes of one OMEGA; only
// the top-left m x m corner of Y is a valid output, m = OMEGA - k + 1.
// U and V are also registered and passed on to the PE below and to the PE on the right,
// which makes the PE grid a systolic array.
//
// The structure (register arrays, multiplier matrix, Q adder tree, selectable A^T, systolic
// forwarding) follows the paper. The three-stage pipeline is this design's choice; the paper
// states one tile set per cycle, which this keeps.
//
// Interface: u_in/tag_in from above, v_in from the left, u_out/tag_out/v_out to the
// neighbours (one cycle later), y/y_valid/y_tag to the output buffer.
// Timing: one tile set per cycle; Y appears 3 cycles after U and V.
module winope
  import winocnn_pkg::*;
#(
  parameter int unsigned OMEGA = 6,
  parameter int unsigned Q     = 4,
  parameter int unsigned B     = 2,
  localparam int unsigned E_W  = PROD_W + $clog2(Q) + 1,
  localparam int unsigned Y_W  = E_W + 2 * AT_GROWTH_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  ksel_e                 ksel,
  input  logic signed [U_W-1:0]   u_in  [OMEGA][OMEGA][Q][B],
  input  tile_tag_t               tag_in,
  input  logic signed [WGT_W-1:0] v_in  [OMEGA][OMEGA][Q],
  output logic signed [U_W-1:0]   u_out [OMEGA][OMEGA][Q][B],
  output tile_tag_t               tag_out,
  output logic signed [WGT_W-1:0] v_out [OMEGA][OMEGA][Q],
  output logic                    y_valid,
  output tile_tag_t               y_tag,
  output logic signed [Y_W-1:0]   y [OMEGA][OMEGA][B]
);

  // ---- systolic forwarding ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tag_out <= '0;
    else        tag_out <= tag_in;
  end

  always_ff @(posedge clk) begin
    u_out <= u_in;
    v_out <= v_in;
  end

  // ---- stage 1: element-wise multiplication U (.) V ----
  logic signed [PROD_W-1:0] prod [OMEGA][OMEGA][Q][B];
  tile_tag_t tag1, tag2;

  always_ff @(posedge clk) begin
    for (int i = 0; i < OMEGA; i++)
      for (int j = 0; j < OMEGA; j++)
        for (int q = 0; q < Q; q++)
          for (int b = 0; b < B; b++)
            prod[i][j][q][b] <= PROD_W'(u_in[i][j][q][b]) * PROD_W'(v_in[i][j][q]);
  end

  // ---- stage 2: adder tree over the Q input channels ----
  logic signed [E_W-1:0] e [OMEGA][OMEGA][B];

  always_ff @(posedge clk) begin
    for (int i = 0; i < OMEGA; i++)
      for (int j = 0; j < OMEGA; j++)
        for (int b = 0; b < B; b++) begin
          logic signed [E_W-1:0] s;
          s = '0;
          for (int q = 0; q < Q; q++) s += E_W'(prod[i][j][q][b]);
          e[i][j][b] <= s;
        end
  end

  // ---- stage 3: selectable output transform Y = A^T_sel E A_sel ----
  always_ff @(posedge clk) begin
    for (int b = 0; b < B; b++) begin
      logic signed [Y_W-1:0] t [OMEGA][OMEGA];
      logic signed [Y_W-1:0] acc;
      for (int i = 0; i < OMEGA; i++)
        for (int j = 0; j < OMEGA; j++) begin
          acc = '0;
          for (int k = 0; k < OMEGA; k++) acc += Y_W'(at(OMEGA, ksel, i, k)) * Y_W'(e[k][j][b]);
          t[i][j] = acc;
        end
      for (int i = 0; i < OMEGA; i++)
        for (int j = 0; j < OMEGA; j++) begin
          acc = '0;
          for (int k = 0; k < OMEGA; k++) acc += t[i][k] * Y_W'(at(OMEGA, ksel, j, k));
          y[i][j][b] <= acc;
        end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tag1  <= '0;
      tag2  <= '0;
      y_tag <= '0;
    end else begin
      tag1  <= tag_in;
      tag2  <= tag1;
      y_tag <= tag2;
    end
  end

  assign y_valid = y_tag.valid;

endmodule
