// tb_tile_zero_detector: a tile whose nonzero masks lie only in the halo
// must be reported fully sparse; a single interior bit (at a random place,
// and at the tile's corners) makes it active; clear starts over.
module tb_tile_zero_detector;
  `include "tb_util.svh"
  localparam int XD = 10, YD = 10, ZD = 10;
  logic clk = 0, rst_n = 0, clear = 0, wr_en = 0, tile_active;
  logic [3:0] wr_plane;
  logic [XD*YD-1:0] wr_data;
  always #5 clk = ~clk;
  tile_zero_detector #(.XD(XD), .YD(YD), .ZD(ZD)) dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++; finish_tb(); end

  // px/py/pz: one interior voxel to set, or -1 for none; halo random
  task automatic load(input int px, input int py, input int pz);
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int z = 0; z < ZD; z++) begin
      @(negedge clk); wr_en = 1; wr_plane = 4'(z); wr_data = '0;
      for (int x = 0; x < XD; x++) for (int y = 0; y < YD; y++) begin
        bit halo = (x == 0 || x == XD-1 || y == 0 || y == YD-1 || z == 0 || z == ZD-1);
        if (halo) wr_data[x*YD+y] = 1'($urandom_range(1));
        if (x == px && y == py && z == pz) wr_data[x*YD+y] = 1'b1;
      end
    end
    @(negedge clk); wr_en = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (20) begin
      load(-1, -1, -1); check(!tile_active, "halo-only tile is fully sparse");
      load($urandom_range(XD-2, 1), $urandom_range(YD-2, 1), $urandom_range(ZD-2, 1));
      check(tile_active, "one interior voxel makes the tile active");
    end
    load(1, 1, 1);          check(tile_active, "corner (1,1,1)");
    load(XD-2, YD-2, ZD-2); check(tile_active, "corner (N,M,L)");
    finish_tb();
  end
endmodule
