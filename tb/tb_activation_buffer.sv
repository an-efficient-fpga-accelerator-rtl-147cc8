// tb_activation_buffer: fills all banks with random entries, then reads
// with every column naming a different bank (a random permutation, as the
// SRF columns do) and checks the data returned one cycle later.
module tb_activation_buffer;
  `include "tb_util.svh"
  localparam int K = 3, NB = 9, DEPTH = 64, WIDTH = 32;
  logic clk = 0, wr_en = 0;
  logic [3:0] wr_bank;
  logic [5:0] wr_addr;
  logic [WIDTH-1:0] wr_data;
  logic [NB-1:0] rd_en;
  logic [NB-1:0][3:0] rd_bank;
  logic [NB-1:0][5:0] rd_addr;
  logic [NB-1:0][WIDTH-1:0] rd_data;
  logic [WIDTH-1:0] ref_m [NB][DEPTH];
  always #5 clk = ~clk;
  activation_buffer #(.K(K), .DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++; finish_tb(); end
  initial begin
    int perm [NB];
    rd_en = '0; rd_bank = '0; rd_addr = '0;
    for (int b = 0; b < NB; b++) for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); wr_en = 1; wr_bank = 4'(b); wr_addr = 6'(a); wr_data = $urandom();
      ref_m[b][a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    repeat (300) begin
      for (int c = 0; c < NB; c++) perm[c] = c;
      perm.shuffle();
      @(negedge clk);
      for (int c = 0; c < NB; c++) begin
        rd_en[c] = 1'($urandom_range(3) != 0); rd_bank[c] = 4'(perm[c]); rd_addr[c] = 6'($urandom_range(DEPTH-1));
      end
      @(negedge clk);
      for (int c = 0; c < NB; c++)
        if (rd_en[c]) check(rd_data[c] == ref_m[rd_bank[c]][rd_addr[c]], $sformatf("column %0d", c));
      rd_en = '0;
    end
    finish_tb();
  end
endmodule
