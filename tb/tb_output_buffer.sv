// tb_output_buffer: random plain writes and accumulating writes against a
// reference array, read back through the synchronous read port.
module tb_output_buffer;
  `include "tb_util.svh"
  localparam int DEPTH = 32, OC = 4, AW = 32;
  logic clk = 0, wr_en = 0, accumulate = 0, rd_en = 0;
  logic [4:0] wr_addr, rd_addr;
  logic [OC-1:0][AW-1:0] wr_data, rd_data;
  logic [OC-1:0][AW-1:0] ref_m [DEPTH];
  always #5 clk = ~clk;
  output_buffer #(.DEPTH(DEPTH), .OC_PAR(OC), .ACC_W(AW)) dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++; finish_tb(); end
  initial begin
    int n_acc = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); wr_en = 1; accumulate = 0; wr_addr = 5'(a);
      for (int o = 0; o < OC; o++) wr_data[o] = $urandom_range(2000) - 1000;
      ref_m[a] = wr_data;
    end
    repeat (400) begin
      @(negedge clk);
      wr_en = 1; accumulate = 1'($urandom_range(1)); wr_addr = 5'($urandom_range(DEPTH-1));
      for (int o = 0; o < OC; o++) wr_data[o] = $urandom_range(2000) - 1000;
      for (int o = 0; o < OC; o++) ref_m[wr_addr][o] = accumulate ? ref_m[wr_addr][o] + wr_data[o] : wr_data[o];
      n_acc += accumulate;
    end
    @(negedge clk); wr_en = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); rd_en = 1; rd_addr = 5'(a);
      @(negedge clk); rd_en = 0;
      check(rd_data == ref_m[a], $sformatf("entry %0d", a));
    end
    check(n_acc > 0, "accumulating writes exercised");
    finish_tb();
  end
endmodule
