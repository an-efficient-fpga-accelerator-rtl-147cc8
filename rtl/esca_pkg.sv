// esca_pkg: constants shared by the sparse-convolution accelerator.
//
// Kernel size K (3x3x3 Sub-Conv), tile size N x M x L (8x8x8), 16 input and
// 16 output channels processed in parallel, 16-bit activations and 8-bit
// weights follow the paper. The one-voxel halo around a tile, the 32-bit
// accumulator width and the channel-group limits are this design's choices.
package esca_pkg;
  localparam int K      = 3;    // kernel edge, paper: 3x3x3
  localparam int TILE_N = 8;    // tile size along x, paper: 8x8x8
  localparam int TILE_M = 8;    // tile size along y
  localparam int TILE_L = 8;    // tile size along z (the column direction)
  localparam int ACT_W  = 16;   // activation width, paper: 16-bit
  localparam int WGT_W  = 8;    // weight width, paper: 8-bit
  localparam int IC_PAR = 16;   // input channels per match (n+1), paper: 16
  localparam int OC_PAR = 16;   // output channels / computing units (m+1), paper: 16
  localparam int ACC_W  = 32;   // accumulator and output width (own choice)
  localparam int MAX_ICG = 8;   // input-channel groups of 16 (own choice, 128 channels)
  localparam int MAX_OCG = 8;   // output-channel groups of 16 (own choice, 128 channels)

  // Activation-bank index of the line (x, y): any K x K neighbourhood of
  // lines touches K*K different banks.
  function automatic int line_bank(input int x, input int y, input int kk);
    return (x % kk) * kk + (y % kk);
  endfunction
endpackage
