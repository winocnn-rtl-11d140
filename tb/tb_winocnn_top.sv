// tb_winocnn_top: end-to-end test of the accelerator at a reduced size, F4 Winograd PEs
// (OMEGA = 4) in a 2 x 2 array with Q = 2, B = 2 and small buffers. Layers: a 3x3
// convolution with padding over several row blocks, a 1x1 convolution whose row block is a
// single tile per PE (so consecutive channel groups hit the same output address and the
// bypass path is used), a 5x5 kernel split into 2 x 2 parts of 3x3, and a 1x7 kernel split
// into seven 1x1 parts. See tb_top_body.svh for what is checked.
module tb_winocnn_top;
  import winocnn_pkg::*;
  import tb_wino_pkg::*;

  localparam int OMEGA = 4, M = 2, N = 2, Q = 2, B = 2, HB = 4, WB = 8;
  localparam int DIN = 512, DOUT = 64, DW = 64;
  localparam int WATCHDOG = 200000;

  `include "tb_top_body.svh"

  //                      ks id od ih iw pad kh kw rs vin vw
  localparam layer_t LAYERS [4] = '{
    '{1, 3, 3, 6, 6, 1, 3, 3, 4, 8, 3},
    '{0, 4, 2, 4, 8, 0, 1, 1, 4, 8, 3},
    '{1, 2, 2, 5, 5, 2, 5, 5, 4, 4, 2},
    '{0, 3, 3, 4, 10, 0, 1, 7, 4, 8, 3}
  };

  winocnn_top #(.OMEGA(OMEGA), .M(M), .N(N), .Q(Q), .B(B), .HB(HB), .WB(WB),
                .DIN(DIN), .DOUT(DOUT), .DW(DW)) dut (.*);

endmodule
