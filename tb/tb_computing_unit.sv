// tb_computing_unit: random signed activations and weights, including the
// extreme values, against a directly computed dot product.
module tb_computing_unit;
  `include "tb_util.svh"
  localparam int IC = 16, AW = 16, WW = 8, SW = AW + WW + 4;
  logic signed [IC-1:0][AW-1:0] act;
  logic signed [IC-1:0][WW-1:0] wgt;
  logic signed [SW-1:0] psum;
  computing_unit #(.IC_PAR(IC), .ACT_W(AW), .WGT_W(WW)) dut (.*);
  initial begin
    for (int t = 0; t < 1000; t++) begin
      automatic longint e = 0;
      for (int i = 0; i < IC; i++) begin
        act[i] = (t == 0) ? 16'h8000 : (t == 1) ? 16'h7fff : AW'($urandom());
        wgt[i] = (t == 0) ? 8'h80 : (t == 1) ? 8'h7f : WW'($urandom());
        e += longint'($signed(act[i])) * longint'($signed(wgt[i]));
      end
      #1;
      check(longint'(psum) == e, $sformatf("psum %0d exp %0d", psum, e));
    end
    finish_tb();
  end
endmodule
