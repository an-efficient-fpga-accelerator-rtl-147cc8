// tb_computing_array: random matches every cycle; each output channel's
// partial sum and the tags must appear one cycle later and equal the
// reference dot product of the broadcast activations with that channel's
// weights.
module tb_computing_array;
  `include "tb_util.svh"
  localparam int IC = 4, OC = 3, AW = 16, WW = 8, OW = 6, SW = AW + WW + 2;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_first, in_last, out_valid, out_first, out_last;
  logic [IC*AW-1:0] in_act;
  logic [OC*IC*WW-1:0] in_wgt;
  logic [OW-1:0] in_idx, out_idx;
  logic [OC-1:0][SW-1:0] out_psum;
  longint e [OC];
  logic ev, ef, el; logic [OW-1:0] ei;
  always #5 clk = ~clk;
  computing_array #(.IC_PAR(IC), .OC_PAR(OC), .ACT_W(AW), .WGT_W(WW), .OW(OW)) dut (.*);
  initial begin repeat (5000) @(posedge clk); failures++; finish_tb(); end
  initial begin
    in_valid = 0; in_first = 0; in_last = 0; in_idx = '0; in_act = '0; in_wgt = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (500) begin
      @(negedge clk);
      in_valid = 1'($urandom_range(3) != 0); in_first = 1'($urandom()); in_last = 1'($urandom());
      in_idx = OW'($urandom()); in_act = {$urandom(), $urandom()}; in_wgt = {$urandom(), $urandom(), $urandom()};
      for (int m = 0; m < OC; m++) begin
        e[m] = 0;
        for (int n = 0; n < IC; n++)
          e[m] += longint'($signed(in_act[n*AW +: AW])) * longint'($signed(in_wgt[(m*IC+n)*WW +: WW]));
      end
      ev = in_valid; ef = in_first; el = in_last; ei = in_idx;
      @(negedge clk);
      check(out_valid == ev, "valid latency 1");
      if (ev) begin
        check(out_first == ef && out_last == el && out_idx == ei, "tags");
        for (int m = 0; m < OC; m++) check(longint'($signed(out_psum[m])) == e[m], $sformatf("oc %0d", m));
      end
      in_valid = 0;
    end
    finish_tb();
  end
endmodule
