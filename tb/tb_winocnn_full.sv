// tb_winocnn_full: end-to-end test of the accelerator at its default size: F6 Winograd PEs
// (OMEGA = 6) in a 4 x 2 array, Q = 4 input channels and B = 2 images per PE, an 8 x 16
// input bank matrix of depth 4096, output buffers of depth 1024, weight buffers of depth
// 1024. Layers: 3x3 with padding, 1x1 (single tile per PE, bypass path), 5x5, a 7x7
// kernel split into 3 x 3 parts of 3x3, and a 1x7 kernel split into 1x1 parts.
// Values are kept small so that 576 x the convolution stays inside the 18-bit output range.
module tb_winocnn_full;
  import winocnn_pkg::*;
  import tb_wino_pkg::*;

  localparam int OMEGA = 6, M = 4, N = 2, Q = 4, B = 2, HB = 8, WB = 16;
  localparam int DIN = 4096, DOUT = 1024, DW = 1024;
  localparam int WATCHDOG = 400000;

  `include "tb_top_body.svh"

  //                      ks id od ih iw pad kh kw rs vin vw
  localparam layer_t LAYERS [5] = '{
    '{1, 5, 5, 8, 8, 1, 3, 3, 8, 2, 1},
    '{0, 8, 4, 6, 12, 0, 1, 1, 6, 2, 1},
    '{2, 2, 4, 6, 6, 2, 5, 5, 4, 2, 1},
    '{1, 2, 2, 7, 7, 3, 7, 7, 8, 1, 1},
    '{0, 4, 4, 4, 10, 0, 1, 7, 4, 2, 1}
  };

  winocnn_top dut (.*);

endmodule
