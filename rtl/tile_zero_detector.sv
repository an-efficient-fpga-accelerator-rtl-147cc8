// tile_zero_detector: the sparsity check of the tile-based zero removing
// strategy.
//
// While the mask planes of a tile are written, it ORs together every mask
// bit that lies inside the tile proper (the halo is ignored, as a halo voxel
// belongs to a neighbouring tile). After the last plane, tile_active is 1
// when the tile holds at least one nonzero activation; a fully sparse tile is
// then skipped by the main controller. The paper states the rule (remove a
// tile whose activations are all zero); doing it on the mask write stream is
// this design's choice. clear starts a new tile; tile_active is a register
// and valid the cycle after the last write.
module tile_zero_detector #(
  parameter int XD = esca_pkg::TILE_N + 2,
  parameter int YD = esca_pkg::TILE_M + 2,
  parameter int ZD = esca_pkg::TILE_L + 2,
  localparam int ZW = $clog2(ZD)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             wr_en,
  input  logic [ZW-1:0]    wr_plane,
  input  logic [XD*YD-1:0] wr_data,
  output logic             tile_active
);
  // Interior lines of a plane: 1 <= x <= XD-2, 1 <= y <= YD-2.
  function automatic logic [XD*YD-1:0] interior_mask();
    logic [XD*YD-1:0] m = '0;
    for (int x = 1; x < XD-1; x++)
      for (int y = 1; y < YD-1; y++)
        m[x*YD+y] = 1'b1;
    return m;
  endfunction
  localparam logic [XD*YD-1:0] INTERIOR = interior_mask();

  logic plane_inside;
  assign plane_inside = (wr_plane != '0) && (int'(wr_plane) < ZD-1);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)     tile_active <= 1'b0;
    else if (clear) tile_active <= 1'b0;
    else if (wr_en && plane_inside && |(wr_data & INTERIOR))
      tile_active <= 1'b1;
endmodule
