// tb_accumulator: random match groups (1 to 27 partial sums, random
// gaps between them); the group sum must leave one cycle after the last
// partial sum, with its index, and only then.
module tb_accumulator;
  `include "tb_util.svh"
  localparam int OC = 4, SW = 28, AW = 32, OW = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_first, in_last, out_valid;
  logic [OC-1:0][SW-1:0] in_psum;
  logic [OW-1:0] in_idx, out_idx;
  logic [OC-1:0][AW-1:0] out_data;
  int n_out = 0;
  always #5 clk = ~clk;
  accumulator #(.OC_PAR(OC), .SW(SW), .ACC_W(AW), .OW(OW)) dut (.*);
  initial begin repeat (50000) @(posedge clk); failures++; finish_tb(); end
  always @(posedge clk) if (rst_n && out_valid) n_out++;
  initial begin
    int len, e [OC];
    in_valid = 0; in_first = 0; in_last = 0; in_psum = '0; in_idx = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int g = 0; g < 300; g++) begin
      len = $urandom_range(27, 1);
      foreach (e[o]) e[o] = 0;
      for (int k = 0; k < len; k++) begin
        @(negedge clk);
        in_valid = 1; in_first = (k == 0); in_last = (k == len-1); in_idx = OW'(g);
        for (int o = 0; o < OC; o++) begin
          int v = int'($urandom_range(2000000)) - 1000000;
          in_psum[o] = SW'(v); e[o] += v;
        end
        if (k != len-1) begin
          @(negedge clk); check(!out_valid, "no output inside a group");
          in_valid = 0;
          if ($urandom_range(1)) begin @(negedge clk); check(!out_valid, "no output in a gap"); end
        end
      end
      @(negedge clk); in_valid = 0;
      check(out_valid && int'(out_idx) == (g % 256), "group result valid one cycle after last");
      for (int o = 0; o < OC; o++) check($signed(out_data[o]) == e[o], $sformatf("group %0d oc %0d", g, o));
    end
    @(negedge clk);
    check(n_out == 300, "one result per group");
    finish_tb();
  end
endmodule
