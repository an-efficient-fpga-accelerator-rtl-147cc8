// tb_match_mux: fills a FIFO group with random matches for random match
// groups and pushes their descriptors; checks that each group leaves
// column by column in FIFO order, with first/last flags and the group's
// index, one match per cycle while data are available.
module tb_match_mux;
  `include "tb_util.svh"
  localparam int K = 3, NB = 9, WIDTH = 16, OW = 10;
  logic clk = 0, rst_n = 0;
  logic desc_push, desc_room, m_valid, m_first, m_last, busy;
  logic [NB-1:0][1:0] desc_cnt;
  logic [OW-1:0] desc_idx, m_idx;
  logic [NB-1:0] f_push, fifo_empty, fifo_pop;
  logic [NB-1:0][WIDTH-1:0] f_data, fifo_data;
  logic [NB-1:0][4:0] f_free;
  logic [WIDTH-1:0] m_data;
  typedef struct { logic [WIDTH-1:0] d; bit first, last; int idx; } exp_t;
  exp_t expq [$];
  always #5 clk = ~clk;
  fifo_group #(.K(K), .WIDTH(WIDTH), .DEPTH(16)) u_fifos (.clk, .rst_n, .push(f_push), .wr_data(f_data),
    .pop(fifo_pop), .rd_data(fifo_data), .empty(fifo_empty), .free(f_free));
  match_mux #(.K(K), .WIDTH(WIDTH), .OW(OW)) dut (.*);
  initial begin repeat (50000) @(posedge clk); failures++; finish_tb(); end

  always @(posedge clk) if (rst_n && m_valid) begin
    if (expq.size() == 0) check(0, "unexpected match");
    else begin
      automatic exp_t e = expq.pop_front();
      check(m_data == e.d && m_first == e.first && m_last == e.last && int'(m_idx) == e.idx,
            $sformatf("match %h f%0d l%0d i%0d, exp %h f%0d l%0d i%0d", m_data, m_first, m_last, m_idx, e.d, e.first, e.last, e.idx));
    end
  end

  initial begin
    int total, k;
    logic [WIDTH-1:0] gdata [NB][K];
    desc_push = 0; f_push = '0; f_data = '0; desc_cnt = '0; desc_idx = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int g = 0; g < 300; g++) begin
      // a random group, at least one match
      do begin
        total = 0;
        for (int c = 0; c < NB; c++) begin desc_cnt[c] = 2'($urandom_range(3) == 0 ? $urandom_range(3) : 0); total += desc_cnt[c]; end
      end while (total == 0);
      while (!desc_room || f_free[0] < 4) @(negedge clk);
      // data of the group, and its expected order: column by column
      for (int c = 0; c < NB; c++) for (int r = 0; r < K; r++) gdata[c][r] = WIDTH'($urandom());
      k = 0;
      for (int c = 0; c < NB; c++) for (int r = 0; r < int'(desc_cnt[c]); r++) begin
        expq.push_back('{d: gdata[c][r], first: (k == 0), last: (k == total-1), idx: g});
        k++;
      end
      for (int r = 0; r < K; r++) begin
        for (int c = 0; c < NB; c++) begin
          f_push[c] = (r < desc_cnt[c]); f_data[c] = gdata[c][r];
        end
        desc_push = (r == 0); desc_idx = OW'(g);
        @(negedge clk);
        desc_push = 0;
      end
      f_push = '0;
    end
    repeat (50) @(negedge clk);
    check(expq.size() == 0, "all matches delivered");
    check(!busy, "idle at the end");
    finish_tb();
  end

endmodule
