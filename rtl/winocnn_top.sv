// winocnn_top: the WinoCNN convolution accelerator core.
//
// Data path, in the order a tile set flows through it:
//   input buffer (bram_buffer_matrix, HB x WB banks)
//   -> planar data access (bank addresses, plane / row-plane / tile multiplexers)
//   -> N input transforms (U = B^T d B)
//   -> M x N systolic array of WinoPEs (U moves down, V moves right)
//   -> one ping-pong output buffer per PE (accumulates over input channels and kernel
//      split parts).
// M weight buffers, one per array row, feed transformed weights V from the left.
// The controller walks the loops of one row block and issues one tile set per cycle; the
// weight read is delayed so that V meets U at the array edge.
//
// Off-chip memory, the data movers and the host are not part of this module: the input
// buffer, the weight buffers and the drain side of the output buffers are exposed as ports.
// Input pixels are written by coordinates (row, column, channel group) of the zero-padded
// feature map; the bank and address follow Eq. (3) of the address mapping, computed here.
//
// Operation: load inputs and weights, drive cfg and pulse start. busy stays high until the
// last result is written; then done pulses and the output buffers swap halves, so the
// results of this row block can be read on out_rd_* while the next block computes.
// Output element (i, j, b) of PE(p, q) at address odg*RT*CT + rt*CT + ct is output channel
// odg*M + p, row r_base + rt*m + i, column (ct*N + q)*m + j, image b, for i, j < m.
// Timing: the first result is written 6 + (p + q) + 5 cycles after the first issue; a row
// block of T tile sets takes T + 6 + (M - 1) + (N - 1) + 5 cycles from start to done.
module winocnn_top
  import winocnn_pkg::*;
#(
  parameter int unsigned OMEGA = 6,
  parameter int unsigned M     = 4,
  parameter int unsigned N     = 2,
  parameter int unsigned Q     = 4,
  parameter int unsigned B     = 2,
  parameter int unsigned HB    = 8,
  parameter int unsigned WB    = 16,
  parameter int unsigned DIN   = 4096,
  parameter int unsigned DOUT  = 1024,
  parameter int unsigned DW    = 1024,
  localparam int unsigned WORD_W = Q * B * DATA_W,
  localparam int unsigned IAW  = $clog2(DIN),
  localparam int unsigned OAW  = $clog2(DOUT),
  localparam int unsigned WAW  = $clog2(DW),
  localparam int unsigned MW   = (M > 1) ? $clog2(M) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // control
  input  layer_cfg_t              cfg,
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  // input buffer load port
  input  logic                    in_wr_en,
  input  logic [15:0]             in_wr_r,
  input  logic [15:0]             in_wr_c,
  input  logic [11:0]             in_wr_g,
  input  logic [WORD_W-1:0]       in_wr_data,
  // weight buffer load port
  input  logic                    w_wr_en,
  input  logic [MW-1:0]           w_wr_row,
  input  logic [WAW-1:0]          w_wr_addr,
  input  logic signed [WGT_W-1:0] w_wr_data [OMEGA][OMEGA][Q],
  // output buffer drain port
  input  logic                    out_rd_en,
  input  logic [OAW-1:0]          out_rd_addr,
  output logic signed [ACC_W-1:0] out_rd_data [M][N][OMEGA][OMEGA][B],
  // event: some output buffer forwarded a sum this cycle
  output logic                    bypass_evt
);

  localparam int unsigned PDA_LAT = 5;

  // ---------------- controller ----------------
  logic            ctl_busy, iss_valid;
  logic [15:0]     iss_r, iss_c;
  logic [11:0]     iss_g;
  logic [WAW-1:0]  iss_waddr;
  tile_tag_t       iss_tag;
  ksel_e           ksel_q;
  logic [11:0]     idg_q;
  logic [3:0]      low_q;

  winocnn_controller #(.OMEGA(OMEGA), .N(N), .WADDR_W(WAW)) u_ctl (
    .clk, .rst_n, .start(start && !busy), .cfg,
    .busy(ctl_busy), .iss_valid, .iss_r, .iss_c, .iss_g, .iss_waddr, .iss_tag
  );

  // layer settings used by the data path, latched at start
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ksel_q <= KS_1X1;
      idg_q  <= '0;
      low_q  <= '0;
    end else if (start && !busy) begin
      ksel_q <= cfg.ksel;
      idg_q  <= cfg.id_groups;
      low_q  <= cfg.low_bits;
    end
  end

  // ---------------- input buffer ----------------
  logic            bk_rd_en;
  logic [IAW-1:0]  bk_rd_addr [HB][WB];
  logic [WORD_W-1:0] bk_rd_data [HB][WB];
  logic [IAW-1:0]  in_wr_addr;

  assign in_wr_addr = IAW'(in_addr(HB, WB, in_wr_r, in_wr_c, in_wr_g, cfg.id_groups, cfg.low_bits));

  bram_buffer_matrix #(.HB(HB), .WB(WB), .DEPTH(DIN), .WORD_W(WORD_W)) u_inbuf (
    .clk,
    .wr_en  (in_wr_en),
    .wr_h   (in_wr_r[$clog2(HB)-1:0]),
    .wr_w   (in_wr_c[$clog2(WB)-1:0]),
    .wr_addr(in_wr_addr),
    .wr_data(in_wr_data),
    .rd_en  (bk_rd_en),
    .rd_addr(bk_rd_addr),
    .rd_data(bk_rd_data)
  );

  // ---------------- planar data access ----------------
  logic              tile_valid;
  tile_tag_t         tile_tag;
  logic [WORD_W-1:0] tiles [N][OMEGA][OMEGA];

  planar_data_access #(.OMEGA(OMEGA), .N(N), .HB(HB), .WB(WB), .DEPTH(DIN), .WORD_W(WORD_W)) u_pda (
    .clk, .rst_n,
    .ksel(ksel_q), .id_groups(idg_q), .low_bits(low_q),
    .req_valid(iss_valid), .req_r(iss_r), .req_c(iss_c), .req_g(iss_g), .req_tag(iss_tag),
    .rd_en(bk_rd_en), .rd_addr(bk_rd_addr), .rd_data(bk_rd_data),
    .tile_valid, .tile_tag, .tiles
  );

  // ---------------- input transforms ----------------
  logic                  u_valid;
  tile_tag_t             u_tag;
  logic signed [U_W-1:0] u [N][OMEGA][OMEGA][Q][B];

  input_transform #(.OMEGA(OMEGA), .N(N), .Q(Q), .B(B)) u_itrans (
    .clk, .rst_n,
    .in_valid(tile_valid), .in_tag(tile_tag), .tiles,
    .out_valid(u_valid), .out_tag(u_tag), .u
  );

  // ---------------- weight buffers ----------------
  // the weight address is delayed so that V leaves the buffers with U leaving itrans
  logic           wv [PDA_LAT];
  logic [WAW-1:0] wa [PDA_LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < PDA_LAT; s++) wv[s] <= 1'b0;
    end else begin
      wv[0] <= iss_valid;
      for (int s = 1; s < PDA_LAT; s++) wv[s] <= wv[s-1];
    end
  end

  always_ff @(posedge clk) begin
    wa[0] <= iss_waddr;
    for (int s = 1; s < PDA_LAT; s++) wa[s] <= wa[s-1];
  end

  logic signed [WGT_W-1:0] v [M][OMEGA][OMEGA][Q];

  for (genvar i = 0; i < M; i++) begin : g_wbuf
    weight_buffer #(.OMEGA(OMEGA), .Q(Q), .DEPTH(DW)) u_wbuf (
      .clk,
      .wr_en  (w_wr_en && w_wr_row == MW'(i)),
      .wr_addr(w_wr_addr),
      .wr_data(w_wr_data),
      .rd_en  (wv[PDA_LAT-1]),
      .rd_addr(wa[PDA_LAT-1]),
      .rd_data(v[i])
    );
  end

  // ---------------- systolic array ----------------
  logic [M*N-1:0] bypass;
  logic           last_written;
  tile_tag_t      u_tag_v;

  always_comb begin
    u_tag_v       = u_tag;
    u_tag_v.valid = u_valid;
  end

  systolic_array #(.OMEGA(OMEGA), .M(M), .N(N), .Q(Q), .B(B), .DOUT(DOUT)) u_array (
    .clk, .rst_n,
    .ksel(ksel_q),
    .tag_top(u_tag_v),
    .u_top(u),
    .v_left(v),
    .swap(last_written),
    .rd_en(out_rd_en), .rd_addr(out_rd_addr), .rd_data(out_rd_data),
    .bypass, .last_written
  );

  // ---------------- status ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= last_written;
      if (start && !busy)    busy <= 1'b1;
      else if (last_written) busy <= 1'b0;
    end
  end

  assign bypass_evt = |bypass;

  // the controller only runs while the top is busy
  a_ctl_in_busy: assert property (@(posedge clk) disable iff (!rst_n) ctl_busy |-> busy);

endmodule
