// systolic_array: M x N grid of WinoPEs, each with its own ping-pong output buffer.
//
// Row i of the grid works on output channel od+i and gets its weights from the left;
// column j works on the j-th input tile of the cycle (output columns c+j*m .. c+j*m+m-1)
// and gets its transformed inputs from the top. Every PE registers what it receives and
// passes U down and V right, so a tile set travels one PE per cycle instead of being
// broadcast (no high fan-out). To make U and V meet in PE(i,j), column j's input is
// delayed j cycles and row i's weights i cycles at the array edge; PE(i,j) then works on
// the tile set issued i+j cycles earlier. The tag (output address, first/last flags)
// travels with U, so every output buffer writes the same address for the same tile set.
//
// Paper: M x N grid, weights shared along rows and inputs along columns, PE-to-PE links
// (the paper's row_fifo / col_fifo, which pass data on after one cycle). Here the links are
// single registers and the whole array advances in lock step: this design's choice, since
// nothing in the array ever stalls. Edge skew registers are also this design's.
//
// Timing: one tile set per cycle; the result of a tile set is written into PE(i,j)'s buffer
// i + j + 3 + 2 cycles after it enters the array. `last_written` pulses when the last tile
// set of a row block has been written by the bottom-right PE, the last one to finish.
module systolic_array
  import winocnn_pkg::*;
#(
  parameter int unsigned OMEGA = 6,
  parameter int unsigned M     = 4,
  parameter int unsigned N     = 2,
  parameter int unsigned Q     = 4,
  parameter int unsigned B     = 2,
  parameter int unsigned DOUT  = 1024,
  localparam int unsigned AW   = $clog2(DOUT)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  ksel_e                   ksel,
  input  tile_tag_t               tag_top,
  input  logic signed [U_W-1:0]   u_top  [N][OMEGA][OMEGA][Q][B],
  input  logic signed [WGT_W-1:0] v_left [M][OMEGA][OMEGA][Q],
  input  logic                    swap,
  input  logic                    rd_en,
  input  logic [AW-1:0]           rd_addr,
  output logic signed [ACC_W-1:0] rd_data [M][N][OMEGA][OMEGA][B],
  output logic [M*N-1:0]          bypass,
  output logic                    last_written
);

  localparam int unsigned E_W = PROD_W + $clog2(Q) + 1;
  localparam int unsigned Y_W = E_W + 2 * AT_GROWTH_W;

  typedef logic signed [U_W-1:0]   u_tile_t [OMEGA][OMEGA][Q][B];
  typedef logic signed [WGT_W-1:0] v_tile_t [OMEGA][OMEGA][Q];

  // links: u_link[i][j] enters PE(i,j) from above, v_link[i][j] from the left
  u_tile_t   u_link [M+1][N];
  tile_tag_t t_link [M+1][N];
  v_tile_t   v_link [M][N+1];
  logic [M*N-1:0] last_w;

  // ---- edge skew: column j delayed j cycles ----
  for (genvar j = 0; j < N; j++) begin : g_uskew
    if (j == 0) begin : g_direct
      assign u_link[0][0] = u_top[0];
      assign t_link[0][0] = tag_top;
    end else begin : g_delay
      u_tile_t   ud [j];
      tile_tag_t td [j];
      always_ff @(posedge clk) begin
        ud[0] <= u_top[j];
        for (int s = 1; s < j; s++) ud[s] <= ud[s-1];
      end
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int s = 0; s < j; s++) td[s] <= '0;
        end else begin
          td[0] <= tag_top;
          for (int s = 1; s < j; s++) td[s] <= td[s-1];
        end
      end
      assign u_link[0][j] = ud[j-1];
      assign t_link[0][j] = td[j-1];
    end
  end

  // ---- edge skew: row i delayed i cycles ----
  for (genvar i = 0; i < M; i++) begin : g_vskew
    if (i == 0) begin : g_direct
      assign v_link[0][0] = v_left[0];
    end else begin : g_delay
      v_tile_t vd [i];
      always_ff @(posedge clk) begin
        vd[0] <= v_left[i];
        for (int s = 1; s < i; s++) vd[s] <= vd[s-1];
      end
      assign v_link[i][0] = vd[i-1];
    end
  end

  // ---- PE grid ----
  for (genvar i = 0; i < M; i++) begin : g_row
    for (genvar j = 0; j < N; j++) begin : g_col
      logic                  y_valid;
      tile_tag_t             y_tag;
      logic signed [Y_W-1:0] y [OMEGA][OMEGA][B];

      winope #(.OMEGA(OMEGA), .Q(Q), .B(B)) u_pe (
        .clk, .rst_n, .ksel,
        .u_in   (u_link[i][j]),
        .tag_in (t_link[i][j]),
        .v_in   (v_link[i][j]),
        .u_out  (u_link[i+1][j]),
        .tag_out(t_link[i+1][j]),
        .v_out  (v_link[i][j+1]),
        .y_valid, .y_tag, .y
      );

      output_buffer #(.OMEGA(OMEGA), .B(B), .DEPTH(DOUT), .Y_W(Y_W)) u_obuf (
        .clk, .rst_n, .swap,
        .bank        (),
        .in_valid    (y_valid),
        .in_tag      (y_tag),
        .y,
        .rd_en, .rd_addr,
        .rd_data     (rd_data[i][j]),
        .bypass      (bypass[i*N+j]),
        .last_written(last_w[i*N+j])
      );
    end
  end

  assign last_written = last_w[M*N-1];

endmodule
