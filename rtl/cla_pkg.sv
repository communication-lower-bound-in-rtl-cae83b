// cla_pkg: shared types, constants and arithmetic of the communication-optimal
// convolution accelerator.
//
// The accelerator computes one convolutional layer as a sequence of output
// tiles ("output sub-matrices" of b images x z output channels x y rows x x
// columns). Each tile is accumulated over all input channels, one channel per
// iteration (k = 1), and each iteration is split into Wk*Hk passes, one per
// kernel position. This package holds what every block agrees on:
//   * the 16-bit fixed-point data type (the 16-bit width follows the paper;
//     the number of fraction bits, FRAC_W, is this design's choice),
//   * the saturating multiply-accumulate used by every PE,
//   * the run-time layer/tiling configuration structure,
//   * the tag that travels with each finished output to the DRAM side.
package cla_pkg;

  // 16-bit fixed-point arithmetic units (paper). Psums are also 16 bit: 64 KB
  // of Psums are 32768 entries.
  localparam int unsigned DATA_W = 16;
  // Fraction bits of the fixed-point format (design choice; the paper gives
  // no format). Products are shifted right by FRAC_W before accumulation.
  localparam int unsigned FRAC_W = 8;

  typedef logic signed [DATA_W-1:0] data_t;

  // Run-time configuration of one layer run. All fields are held stable by
  // the host while 'busy' is high.
  //   n_tiles : number of output tiles (output sub-matrices) to compute
  //   ci      : input channels = iterations per tile (k = 1)
  //   wk, hk  : kernel width / height, stride: convolution stride D
  //   xs, ys  : output columns / rows computed by one PE row
  //   zs      : output channels per PE (channel c, c+q, c+2q, ...)
  //   z       : valid output channels of the tile (z <= q*zs)
  //   nbx,nby : PE-row blocks across / down one image of the tile
  //   nb      : images of the batch in one tile (b)
  typedef struct packed {
    logic [15:0] n_tiles;
    logic [15:0] ci;
    logic [7:0]  wk;
    logic [7:0]  hk;
    logic [3:0]  stride;
    logic [7:0]  xs;
    logic [7:0]  ys;
    logic [7:0]  zs;
    logic [8:0]  z;
    logic [7:0]  nbx;
    logic [7:0]  nby;
    logic [7:0]  nb;
  } layer_cfg_t;

  // Position of an output inside its tile: image, output channel, row, column.
  typedef struct packed {
    logic [7:0] img;
    logic [8:0] chan;
    logic [7:0] oy;
    logic [7:0] ox;
  } out_tag_t;

  // Saturating fixed-point multiply-accumulate: acc + ((a*b) >>> FRAC_W),
  // clipped to the 16-bit range.
  localparam int DATA_MAX = 2**(DATA_W-1) - 1;
  localparam int DATA_MIN = -(2**(DATA_W-1));

  function automatic data_t mac_sat(input data_t acc, input data_t a, input data_t b);
    logic signed [2*DATA_W-1:0] prod;
    logic signed [2*DATA_W:0]   sum;
    prod = a * b;
    sum  = (2*DATA_W+1)'(prod >>> FRAC_W) + (2*DATA_W+1)'(acc);
    if (sum > (2*DATA_W+1)'(DATA_MAX))     return data_t'(DATA_MAX);
    else if (sum < (2*DATA_W+1)'(DATA_MIN)) return data_t'(DATA_MIN);
    else                     return sum[DATA_W-1:0];
  endfunction

endpackage
