// mask_buffer: holds the one-bit index mask of the tile being processed.
//
// The tile and a one-voxel halo, XD x YD x ZD = (N+2) x (M+2) x (L+2) voxels,
// are stored as ZD planes; a plane word holds bit (x*YD + y) for voxel
// (x, y). A set bit marks a nonzero activation, as in the paper's encoding
// scheme. Plane organisation, halo and the asynchronous read (distributed
// RAM, so that one plane can be read and judged in the same cycle) are this
// design's choices. Write: one plane per cycle from the load side. Read: two
// independent combinational plane ports (matching pipeline and line-base
// pre-pass).
module mask_buffer #(
  parameter int XD = esca_pkg::TILE_N + 2,
  parameter int YD = esca_pkg::TILE_M + 2,
  parameter int ZD = esca_pkg::TILE_L + 2,
  localparam int ZW = $clog2(ZD)
) (
  input  logic               clk,
  input  logic               wr_en,
  input  logic [ZW-1:0]      wr_plane,
  input  logic [XD*YD-1:0]   wr_data,
  input  logic [ZW-1:0]      rd_plane_a,
  output logic [XD*YD-1:0]   rd_data_a,
  input  logic [ZW-1:0]      rd_plane_b,
  output logic [XD*YD-1:0]   rd_data_b
);
  logic [XD*YD-1:0] mem [ZD];

  always_ff @(posedge clk)
    if (wr_en) mem[wr_plane] <= wr_data;

  assign rd_data_a = mem[rd_plane_a];
  assign rd_data_b = mem[rd_plane_b];
endmodule
