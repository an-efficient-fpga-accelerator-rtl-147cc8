// tb_fifo_group: random pushes and pops on all FIFOs against reference
// queues; checks head data, empty flags and free counts, and fills one
// FIFO to full.
module tb_fifo_group;
  `include "tb_util.svh"
  localparam int K = 3, NB = 9, WIDTH = 16, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  logic [NB-1:0] push, pop, empty;
  logic [NB-1:0][WIDTH-1:0] wr_data, rd_data;
  logic [NB-1:0][2:0] free;
  logic [WIDTH-1:0] q [NB][$];
  always #5 clk = ~clk;
  fifo_group #(.K(K), .WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++; finish_tb(); end
  initial begin
    int n_full = 0;
    push = '0; pop = '0; wr_data = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (2000) begin
      @(negedge clk);
      for (int c = 0; c < NB; c++) begin
        check(empty[c] == (q[c].size() == 0), "empty flag");
        check(int'(free[c]) == DEPTH - q[c].size(), "free count");
        if (q[c].size() > 0) check(rd_data[c] == q[c][0], "head data");
        if (q[c].size() == DEPTH) n_full++;
        pop[c]  = (q[c].size() > 0) && ($urandom_range(2) == 0);
        push[c] = (q[c].size() < DEPTH || pop[c]) && ($urandom_range(1) == 0);
        wr_data[c] = WIDTH'($urandom());
      end
      @(posedge clk);
      for (int c = 0; c < NB; c++) begin
        if (pop[c]) void'(q[c].pop_front());
        if (push[c]) q[c].push_back(wr_data[c]);
      end
    end
    check(n_full > 0, "a FIFO was full");
    finish_tb();
  end
endmodule
