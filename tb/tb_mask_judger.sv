// tb_mask_judger: presents K random planes per SRF at random centres and
// checks the gathered K*K x K window and the active flag (centre bit)
// against a direct lookup.
module tb_mask_judger;
  `include "tb_util.svh"
  localparam int K = 3, XD = 10, YD = 10;
  logic clk = 0, sample = 0;
  logic [1:0] row;
  logic [3:0] cx, cy;
  logic [XD*YD-1:0] plane;
  logic [K*K-1:0][K-1:0] win_next;
  logic active;
  logic [XD*YD-1:0] planes [K];
  always #5 clk = ~clk;
  mask_judger #(.K(K), .XD(XD), .YD(YD)) dut (.*);
  initial begin repeat (10000) @(posedge clk); failures++; finish_tb(); end
  initial begin
    int n_act = 0;
    repeat (200) begin
      cx = 4'($urandom_range(XD-2, 1)); cy = 4'($urandom_range(YD-2, 1));
      for (int r = 0; r < K; r++) begin
        for (int i = 0; i < XD*YD; i++) planes[r][i] = ($urandom_range(99) < 40);
        @(negedge clk); sample = 1; row = 2'(r); plane = planes[r];
      end
      #1;
      for (int dx = 0; dx < K; dx++) for (int dy = 0; dy < K; dy++) for (int r = 0; r < K; r++)
        check(win_next[dx*K+dy][r] == planes[r][(cx+dx-1)*YD + cy+dy-1], "window bit");
      check(active == planes[1][cx*YD+cy], "active = centre mask");
      n_act += active;
      @(negedge clk); sample = 0;
      check(win_next[4][1] == planes[1][cx*YD+cy], "window held when not sampling");
    end
    check(n_act > 0 && n_act < 200, "both active and non-active SRFs seen");
    finish_tb();
  end
endmodule
