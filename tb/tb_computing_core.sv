// tb_computing_core: back-to-back match groups at one match per cycle;
// each group's sums must appear two cycles after its last match and equal
// the sum over the group's matches of activations times weights.
module tb_computing_core;
  `include "tb_util.svh"
  localparam int IC = 4, OC = 4, AW = 16, WW = 8, ACC = 32, OW = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_first, in_last, out_valid, busy;
  logic [IC*AW-1:0] in_act;
  logic [OC*IC*WW-1:0] in_wgt;
  logic [OW-1:0] in_idx, out_idx;
  logic [OC-1:0][ACC-1:0] out_data;
  longint expq [$][OC];
  int lastq [$];
  always #5 clk = ~clk;
  computing_core #(.IC_PAR(IC), .OC_PAR(OC), .ACT_W(AW), .WGT_W(WW), .ACC_W(ACC), .OW(OW)) dut (.*);
  initial begin repeat (50000) @(posedge clk); failures++; finish_tb(); end
  int g_out = 0;
  always @(negedge clk) if (rst_n && out_valid) begin
    check(expq.size() > 0, "result expected");
    if (expq.size() > 0) begin
      for (int o = 0; o < OC; o++) check(longint'($signed(out_data[o])) == expq[0][o], "sum");
      check(int'(out_idx) == g_out % 256, "index");
      // two register stages: the sums are there two clock periods after
      // the last match was presented
      check(int'($time) - lastq[0] == 20, $sformatf("latency %0d", int'($time) - lastq[0]));
      void'(expq.pop_front()); void'(lastq.pop_front()); g_out++;
    end
  end
  initial begin
    longint e [OC];
    int len;
    in_valid = 0; in_first = 0; in_last = 0; in_idx = '0; in_act = '0; in_wgt = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int g = 0; g < 200; g++) begin
      len = $urandom_range(10, 1);
      foreach (e[o]) e[o] = 0;
      for (int k = 0; k < len; k++) begin
        @(negedge clk);
        in_valid = 1; in_first = (k == 0); in_last = (k == len-1); in_idx = OW'(g);
        in_act = {$urandom(), $urandom()}; in_wgt = {$urandom(), $urandom(), $urandom(), $urandom()};
        for (int m = 0; m < OC; m++)
          for (int n = 0; n < IC; n++)
            e[m] += longint'($signed(in_act[n*AW +: AW])) * longint'($signed(in_wgt[(m*IC+n)*WW +: WW]));
        if (k == len-1) begin expq.push_back(e); lastq.push_back(int'($time)); end
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (5) @(negedge clk);
    check(g_out == 200 && !busy, "all groups out, core idle");
    finish_tb();
  end
endmodule
