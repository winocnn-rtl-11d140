// winocnn_controller: schedules the tile sets of one row block (one iteration of the
// outermost loop L0, RS output rows) into the array, one tile set per cycle.
//
// Loop nest, outermost first, as in the paper's tiled loop (L1..L4) extended by the
// kernel split of large or irregular kernels:
//   odg  over ceil(OD/M) output-channel groups            (L1)
//   sh, sw over the split parts of a kernel larger than k (split mechanism)
//   g    over ceil(ID/Q) input-channel groups              (L2)
//   rt   over ceil(RS/m) output tile rows                  (L3)
//   ct   over ceil(OW/(N m)) groups of N output tiles      (L4)
// For each point it issues the input block position (r, c) = (r_base + rt*m + sh*k,
// ct*N*m + sw*k) and channel group g to the planar data access unit, the weight buffer
// address (one word per odg, sh, sw, g in that order), and a tag with the output buffer
// address odg*RT*CT + rt*CT + ct and the first/last flags. `first` marks the first
// contribution to an output tile (sh = sw = g = 0), so the buffer overwrites instead of
// adding. Split part (sh, sw) reads the feature map shifted by (sh*k, sw*k), which realises
// Output = sum over (i,j) of FM^(ik,jk) * K_s^(i,j).
//
// The loop order and the split offsets follow the paper; the counters, the address
// formulas and the start/busy handshake are this design's choices.
// Timing: `start` (one cycle, while idle) latches cfg; issuing starts the next cycle and
// runs od_groups*split_h*split_w*id_groups*row_tiles*col_tiles cycles without a gap;
// busy is high exactly during those cycles.
module winocnn_controller
  import winocnn_pkg::*;
#(
  parameter int unsigned OMEGA = 6,
  parameter int unsigned N     = 2,
  parameter int unsigned WADDR_W = 10
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  layer_cfg_t         cfg,
  output logic               busy,
  output logic               iss_valid,
  output logic [15:0]        iss_r,
  output logic [15:0]        iss_c,
  output logic [11:0]        iss_g,
  output logic [WADDR_W-1:0] iss_waddr,
  output tile_tag_t          iss_tag
);

  layer_cfg_t   c_q;
  logic [11:0]  odg, g, rt, ct;
  logic [3:0]   sh, sw;
  logic [WADDR_W-1:0] waddr;
  logic [15:0]  m, k;

  assign m = 16'(mtile(OMEGA, c_q.ksel));
  assign k = 16'(ksize(c_q.ksel));

  logic end_ct, end_rt, end_g, end_sw, end_sh, end_odg;
  assign end_ct  = ct  == c_q.col_tiles - 1;
  assign end_rt  = rt  == c_q.row_tiles - 1;
  assign end_g   = g   == c_q.id_groups - 1;
  assign end_sw  = sw  == c_q.split_w - 1;
  assign end_sh  = sh  == c_q.split_h - 1;
  assign end_odg = odg == c_q.od_groups - 1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      c_q   <= '0;
      odg   <= '0; sh <= '0; sw <= '0; g <= '0; rt <= '0; ct <= '0;
      waddr <= '0;
    end else if (!busy) begin
      if (start) begin
        busy  <= 1'b1;
        c_q   <= cfg;
        odg   <= '0; sh <= '0; sw <= '0; g <= '0; rt <= '0; ct <= '0;
        waddr <= '0;
      end
    end else begin
      ct <= end_ct ? '0 : ct + 1'b1;
      if (end_ct) begin
        rt <= end_rt ? '0 : rt + 1'b1;
        if (end_rt) begin
          waddr <= waddr + 1'b1;
          g <= end_g ? '0 : g + 1'b1;
          if (end_g) begin
            sw <= end_sw ? '0 : sw + 1'b1;
            if (end_sw) begin
              sh <= end_sh ? '0 : sh + 1'b1;
              if (end_sh) begin
                odg <= end_odg ? '0 : odg + 1'b1;
                if (end_odg) busy <= 1'b0;
              end
            end
          end
        end
      end
    end
  end

  logic [31:0] tiles_per_group;
  assign tiles_per_group = 32'(c_q.row_tiles) * 32'(c_q.col_tiles);

  always_comb begin
    iss_valid        = busy;
    iss_r            = c_q.r_base + 16'(rt) * m + 16'(sh) * k;
    iss_c            = 16'(ct) * 16'(N) * m + 16'(sw) * k;
    iss_g            = g;
    iss_waddr        = waddr;
    iss_tag.valid    = busy;
    iss_tag.first    = sh == '0 && sw == '0 && g == '0;
    iss_tag.last     = end_ct && end_rt && end_g && end_sw && end_sh && end_odg;
    iss_tag.out_addr = 16'(32'(odg) * tiles_per_group + 32'(rt) * 32'(c_q.col_tiles) + 32'(ct));
  end

  // a row block must contain at least one tile set
  property p_cfg_nonzero;
    @(posedge clk) disable iff (!rst_n)
      (start && !busy) |-> (cfg.od_groups != 0 && cfg.id_groups != 0 && cfg.row_tiles != 0 &&
                            cfg.col_tiles != 0 && cfg.split_h != 0 && cfg.split_w != 0);
  endproperty
  a_cfg_nonzero: assert property (p_cfg_nonzero);

endmodule
