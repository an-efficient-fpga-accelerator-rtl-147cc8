// tb_mask_buffer: writes random mask planes and reads them back through
// both read ports, including a write and read of the same plane.
module tb_mask_buffer;
  `include "tb_util.svh"
  localparam int XD = 10, YD = 10, ZD = 10;
  logic clk = 0, wr_en = 0;
  logic [3:0] wr_plane, rd_plane_a, rd_plane_b;
  logic [XD*YD-1:0] wr_data, rd_data_a, rd_data_b;
  logic [XD*YD-1:0] ref_m [ZD];
  always #5 clk = ~clk;
  mask_buffer #(.XD(XD), .YD(YD), .ZD(ZD)) dut (.*);
  initial begin repeat (5000) @(posedge clk); failures++; finish_tb(); end
  initial begin
    for (int z = 0; z < ZD; z++) begin
      @(negedge clk); wr_en = 1; wr_plane = 4'(z);
      for (int i = 0; i < XD*YD; i++) wr_data[i] = 1'($urandom_range(1));
      ref_m[z] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    repeat (200) begin
      @(negedge clk);
      if ($urandom_range(3) == 0) begin
        wr_en = 1; wr_plane = 4'($urandom_range(ZD-1));
        for (int i = 0; i < XD*YD; i++) wr_data[i] = 1'($urandom_range(1));
      end else wr_en = 0;
      rd_plane_a = 4'($urandom_range(ZD-1)); rd_plane_b = 4'($urandom_range(ZD-1));
      #1;
      check(rd_data_a == ref_m[rd_plane_a], "port a");
      check(rd_data_b == ref_m[rd_plane_b], "port b");
      @(posedge clk); if (wr_en) ref_m[wr_plane] = wr_data;
    end
    finish_tb();
  end
endmodule
