# WinoCNN: a kernel-sharing Winograd systolic array in SystemVerilog

Winograd convolution F(m×m, k×k) computes an m×m block of outputs from a ω×ω input tile,
where ω = m + k − 1, with ω² multiplications instead of m²k². Accelerators usually build one
such engine per kernel size. The key observation behind this design is that with ω fixed, the
input transform and the element-wise product are **the same for every kernel size**:
F₆(6×6,1×1), F₆(4×4,3×3) and F₆(2×2,5×5) share the 6×6 input transform B^T and all 6×6 = 36
multipliers. Only the output transform A^T differs between them, and only in a few entries,
here called selection entries. One processing element (the *WinoPE*) with a selectable A^T
therefore runs 1×1, 3×3 and 5×5 convolutions and keeps every multiplier busy. Larger or
non-square kernels (7×7, 1×7, 7×1, …) are cut into supported pieces whose partial results add
up in the output buffers.

The WinoPEs form an M×N systolic array. Rows share weights and columns share input tiles. A
banked input buffer with a *planar access* unit supplies N overlapping ω×ω tiles every clock
cycle. Each PE has a ping-pong output buffer, so results drain while the next block computes.

The default parameters give the largest configuration: ω = 6, a 4×2 array, Q = 4 input
channels and B = 2 images per PE. This has 4·2·36·4·2 = 2304 multipliers. At 214 MHz it peaks
at 3.9 TOPS of equivalent direct-convolution work for 3×3 kernels.

## 1. One transform, three kernel sizes

For one tile, one input channel and one image, a WinoPE computes

    Y = A^T_sel [ Σ_q (B^T d_q B) ⊙ V_q ] A_sel ,   V_q = G g_q G^T (precomputed)

The sum runs over Q input channels. For each kernel mode, the leading m×m corner of Y is the
output block.

**ω = 4.** A^T_4 is 4×4. Its entry in row 1, column 3 is the selection entry s:

    1  1  1  0
    0  1 -1  s        s = 0 : F(4×4,1×1), all 4 rows used
    0  1  1  0        s = 1 : F(2×2,3×3), rows 0–1 used
    0  1 -1  1

With s = 0, rows 0–1 are padded to keep the matrix 4×4; the 1×1 case still uses all four
rows, because only the middle two columns carry data there.

**ω = 6.** In A^T_6, column 5 holds three selection entries s0, s1, s2 in rows 1, 3 and 5:

    1  1  1   1   1   0
    0  1 -1   2  -2   s0     5×5 : s0 s1 s2 = 1 0 0, m = 2
    0  1  1   4   4   0      3×3 : s0 s1 s2 = 0 1 0, m = 4
    0  1 -1   8  -8   s1     1×1 : s0 s1 s2 = 0 0 1, m = 6
    0  1  1  16  16   0
    0  1 -1  32 -32   s2

Each kernel size needs its own G (weight transform), applied off-chip. The input transform
B^T never changes. The function `winocnn_pkg::at()` holds the table, and `winope.sv` applies it
as constant-coefficient arithmetic, with the kernel mode as its only control.

**Weights arrive transformed.** The weight buffers hold V = G g G^T as 16-bit integers. G
contains fractions (1/4, 1/6, 1/24), so the caller must choose a fixed-point scaling. The
testbenches use integer-scaled matrices, 2·G for ω = 4 and 24·G for ω = 6. That makes every
output exactly 4× (ω = 4) or 576× (ω = 6) the true convolution, which can be checked bit for
bit. How V is quantised in deployment is left to the user; requantising the 18-bit sums is not
part of this RTL.

## 2. Splitting larger kernels

A kernel of H_t×W_t is cut into ⌈H_t/k⌉ × ⌈W_t/k⌉ parts of k×k, zero-filled at the edges.
Part (i, j) is convolved with the input shifted by (i·k, j·k) pixels. All parts accumulate
into the same output tile. Examples:

| kernel | ω = 6 mode | parts |
|---|---|---|
| 7×7 | 3×3 (m = 4) | 3 × 3 |
| 1×7 | 1×1 (m = 6) | 1 × 7 |
| 7×1 | 1×1 (m = 6) | 7 × 1 |
| 5×5 at ω = 4 | 3×3 (m = 2) | 2 × 2 |

The controller runs the split loops (`split_h`, `split_w` in the configuration). It offsets the
input window of each part, takes each part's weight word in turn, and only overwrites the
output tile on the very first contribution.

## 3. The array and its loop order

One *row block* covers RS output rows of one layer. It is the unit of work for one `start`.
The controller issues one *tile set* per clock cycle:

    for odg  < od_groups          // M output channels per group, one per array row
     for sh < split_h, sw < split_w   // kernel parts
      for g  < id_groups          // Q input channels per group
       for rt < row_tiles         // tile rows of m output rows
        for ct < col_tiles        // N·m output columns, one m-wide tile per array column
          issue (row r_base + rt·m + sh·k, col ct·N·m + sw·k, group g)

A tile set is N input tiles, one per array column, each covering all Q channels and B images.
It also reads one transformed weight word per array row (ω²·Q elements). Input tiles enter at
the top and move down one row per cycle. Weights enter at the left and move right one column
per cycle. To line them up, column j's input is delayed j cycles at the top edge and row i's
weight is delayed i cycles at the left edge. PE (i, j) then sees tile set t at cycle t + i + j.
The array never stalls: every stage advances every cycle, so the links between PEs are single
registers.

Each tile set carries a tag through the whole pipeline: valid, first contribution, last tile
set, and output address `odg·RT·CT + rt·CT + ct`. Output element (x, y, image b) of PE (p, q)
at address A is output channel odg·M + p, row r_base + rt·m + x, column (ct·N + q)·m + y.

Weight buffer word order matches the loops: word `(odg·split_h·split_w + sh·split_w + sw)·id_groups + g`
of buffer row p holds the weights of output channel odg·M + p, kernel part (sh, sw), and
channels g·Q … g·Q + Q − 1.

## 4. Feeding N tiles per cycle: banked buffer and planar access

The array needs N ω×ω windows per cycle, for all Q channels and B images. The windows overlap:
neighbouring windows share k − 1 columns. That makes HB·(N·m + k − 1) distinct pixels per
cycle.

**Bank matrix.** The input buffer is HB × WB independent banks, with HB ≥ ω and WB ≥ N·ω, both
powers of two. At the defaults that is 8 × 16 = 128 banks. One bank word holds Q channels × B
images × 8 bits. Pixel (r, c) of channel group g lives in bank (r mod HB, c mod WB) at address

    addr = { r / HB , (c / WB)·IDG + g }        (concatenation; IDG = ⌈ID/Q⌉)

The width of the low field is a run-time setting (`low_bits`). It must hold the largest
(c/WB)·IDG + g of the layer. Under this mapping, any HB × WB window of the padded frame, at any
offset, touches every bank exactly once. Each bank computes its own address from the window
origin, so a whole window is read in one cycle.

**Planar access pipeline** (`planar_data_access.sv`), five cycles from request to tiles:

1. Register the request and compute each bank's address and the two selector sets.
2. Read all banks (a synchronous RAM read).
3. Register the HB×WB plane. Banks return it rotated, with bank (i, j) holding pixel
   (r + ((i − r) mod HB), c + ((j − c) mod WB)).
4. Row multiplexers: for each tile row t, pick bank row (r + t) mod HB.
5. Column multiplexers: tile n, element e takes bank column (c + n·m + e) mod WB.

For example, with HB = WB = 4, ω = 4, m = 2 and a request at (1, 3), tile 0's top-left pixel
comes from bank (1, 3). Its next column wraps round to bank column 0.

The loader writes the zero-padded frame through the top-level port `in_wr_*` by coordinates
(row, column, channel group); `winocnn_top` computes bank and address. Padding is the loader's
job.

## 5. Output buffers: accumulate, bypass, ping-pong

Every PE owns a two-half output buffer of DOUT words. One word is an ω×ω×B tile of 18-bit
sums. One half receives results while the other is drained.

A result with the *first* flag overwrites its word. Any other result is added with saturation
to ±2¹⁷. This read-modify-write takes two cycles (read, then add and write). When a result
arrives for the address written in the previous cycle, the read value is stale. This happens
when a layer has only one tile per channel group, so consecutive input-channel groups hit the
same word. In that case the just-computed sum is forwarded instead, and the `bypass` output
pulses.

When the bottom-right PE writes the tile set tagged *last*, every other PE has already
finished. The buffers then swap halves and the top-level `done` pulses. The finished results
can be read on `out_rd_*` (one cycle read latency, all M·N PEs in parallel) while the next
row block computes into the other half.

## 6. Timing

| stage | cycles |
|---|---|
| controller issue → bank read request (address register) | 1 |
| planar access (bank read, plane, row mux, column mux) | 4 |
| input transform | 1 |
| column j / row i edge skew | j / i |
| WinoPE: multiply, Q-adder tree, output transform | 3 |
| output buffer read-modify-write | 2 |

A row block of T tile sets takes **T + 10 + M + N** cycles from `start` to `done`. T is
od_groups·split_h·split_w·id_groups·row_tiles·col_tiles. The end-to-end testbenches check this
count exactly. `start` must not be raised while `busy` is high; an assertion guards this.

## 7. Interface of `winocnn_top`

| group | signals | use |
|---|---|---|
| control | `cfg` (`layer_cfg_t`), `start`, `busy`, `done` | one row block per start |
| input load | `in_wr_en`, `in_wr_r`, `in_wr_c`, `in_wr_g`, `in_wr_data` | one Q×B word per write |
| weight load | `w_wr_en`, `w_wr_row`, `w_wr_addr`, `w_wr_data` | one ω×ω×Q word of array row `w_wr_row` |
| drain | `out_rd_en`, `out_rd_addr`, `out_rd_data[M][N][ω][ω][B]` | the idle output half |
| event | `bypass_evt` | a forwarded accumulation happened |

`cfg` fields: `ksel` (kernel mode), `low_bits`, `r_base` (first input row of the block in
padded coordinates), `od_groups`, `id_groups`, `row_tiles`, `col_tiles`, `split_h`,
`split_w`. The kernel mode, `id_groups` and `low_bits` are latched at `start`. The input
address mapping for loading uses the live `cfg`. Reset is asynchronous and active low.

Off-chip memory, its data movers and the host processor are outside this RTL. So are pooling
and other non-convolution layers, and the weight transform. They connect through the ports
above.

## 8. Parameters

| parameter | default | meaning |
|---|---|---|
| `OMEGA` | 6 | Winograd tile size ω (4 or 6) |
| `M`, `N` | 4, 2 | array rows (output channels), columns (input tiles) |
| `Q`, `B` | 4, 2 | input channels and images per PE per cycle |
| `HB`, `WB` | 8, 16 | bank matrix; HB ≥ ω, WB ≥ N·ω, powers of two |
| `DIN` | 4096 | words per input bank |
| `DOUT` | 1024 | tile words per output buffer half |
| `DW` | 1024 | words per weight buffer |

The smaller published configurations use ω = 4: a 2×1 array, or an 8×2 array with
DIN = 8192. For ω = 4, use HB = 4 and WB = 8 or more.

## 9. Where this RTL departs from the paper, and other choices

- **Sign of s in A^T_4.** The published A^T_4 gives s = −1 for the 3×3 mode. Combined with the
  published B^T_4 and G_4, that value does not produce a correct convolution; s = +1 does.
  This RTL uses +1.
- **B^T_6** is not given in the source. The standard Cook-Toom matrix for interpolation points
  0, ±1, ±2, ∞ is used, and it agrees with the published G_6 and A^T_6.
- **Input word width.** The source sizes an input bank word as B × 8 bits. Here a word holds Q
  channels, so the array can consume Q channels per cycle as its throughput model assumes.
- **FIFOs between PEs** are single registers. The array moves in lock step and never stalls.
- **Array orientation.** The top-level block diagram labels the array "N rows, M columns".
  The text and the loop diagram put the M output channels on rows. This RTL follows the text.
- **Latency.** The WinoPE has a throughput of one tile set per cycle and a latency of three
  cycles. Planar access has an extra address register (five cycles in total).
- **Stride** is always 1; the source never mentions another stride. Stride-2 layers (found in
  Inception-V4) would have to run at stride 1 and be subsampled.
- **Weight buffer capacity.** A buffer holds DW words, i.e. od_groups·parts·id_groups for one
  start. Deep layers (for example 512→512 channels, 16384 words) are run as several starts over
  the same loaded input, each with a subset of output-channel groups and its own weights.
- **Input buffer** is single-buffered: it is loaded between row blocks. Only output drain
  overlaps with computation.
- **Output buffer** saturates at 18 bits and has the bypass path described above. Neither is
  specified in the source.

## 10. Source files

| file | content |
|---|---|
| `rtl/winocnn_pkg.sv` | widths, kernel-mode enum, B^T / A^T_sel tables, tag and configuration structs, address mapping |
| `rtl/bram_buffer_matrix.sv` | HB×WB input banks |
| `rtl/planar_data_access.sv` | bank addressing and the plane → row → column multiplexer pipeline |
| `rtl/input_transform.sv` | U = B^T d B for N tiles |
| `rtl/weight_buffer.sv` | transformed-weight memory of one array row |
| `rtl/winope.sv` | the kernel-sharing PE |
| `rtl/output_buffer.sv` | ping-pong accumulation buffer with bypass |
| `rtl/systolic_array.sv` | M×N PEs, edge skews, output buffers |
| `rtl/winocnn_controller.sv` | loop counters and tile-set issue |
| `rtl/winocnn_top.sv` | the accelerator core |
| `tb/tb_wino_pkg.sv` | scaled G matrices and weight transform for the testbenches |
| `tb/tb_top_body.svh` | shared end-to-end test: layer generation, loading, reference convolution, drain and compare |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/tb_winocnn_top.sv` | end-to-end at ω = 4, 2×2 array, Q = 2 |
| `tb/tb_winocnn_full.sv` | end-to-end at the default parameters |

## 11. Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself. A watchdog ends a
hung run with a failure. Packages must come first on the command line:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/winocnn_pkg.sv tb/tb_wino_pkg.sv rtl/*.sv tb/tb_winocnn_full.sv \
        --top-module tb_winocnn_full
    ./obj_dir/Vtb_winocnn_full

For a unit test, replace the last file and the top module (for example `tb/tb_winope.sv` and
`tb_winope`).

The end-to-end tests generate random 8-bit layers. They transform the weights with the scaled
G, load the buffers and run row blocks, draining each block while the next one computes. Every
valid output is compared with a direct convolution computed in the testbench. They also count
each mechanism and fail if any never happened: 1×1, 3×3 and 5×5 modes, kernel splitting,
accumulation over channel groups, the bypass, and drain overlapping computation. The
default-size test runs 3×3, 1×1, 5×5, 7×7 (split into 3×3 parts) and 1×7 (split into 1×1
parts) layers in under a second of simulation.

The unit testbenches check each block against its own independent model, including latency.
The planar access test includes the (r, c) = (1, 3), m = 2 example above.
