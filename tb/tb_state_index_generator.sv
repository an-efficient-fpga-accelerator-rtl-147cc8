// tb_state_index_generator: checks the state index (A, B) against the
// worked example of the matching steps (three columns with activations
// A0..A2, B0..B2, C0..C2; expected (1,1)(2,2)(2,2), then (2,1)(2,2)(3,2),
// then (2,0)(3,0)(3,0) for the non-active SRF), then against a reference
// model on random columns with nonzero line bases.
module tb_state_index_generator;
  `include "tb_util.svh"
  localparam int K = 3, COLS = 9, AW = 8, BW = 2;
  logic clk = 0, rst_n = 0, step = 0, new_line = 0, active = 0;
  logic [COLS-1:0][K-1:0]  win;
  logic [COLS-1:0][AW-1:0] base;
  logic [COLS-1:0][AW-1:0] idx_a;
  logic [COLS-1:0][BW-1:0] idx_b;
  always #5 clk = ~clk;
  state_index_generator #(.K(K), .AW(AW)) dut (.*);

  initial begin repeat (5000) @(posedge clk); failures++; finish_tb(); end

  // the three mask columns of the example, rows 0..5
  localparam logic [5:0] COL_A = 6'b101001, COL_B = 6'b010110, COL_C = 6'b001101; // bit r = row r
  task automatic do_step(input int top, input bit nl, input bit act);
    @(negedge clk);
    win = '0;
    win[0] = COL_A[top +: 3]; win[1] = COL_B[top +: 3]; win[2] = COL_C[top +: 3];
    new_line = nl; active = act; step = 1;
    @(negedge clk); step = 0;
  endtask

  initial begin
    int ea [COLS]; int lines [COLS][16]; int rb [COLS];
    base = '0; win = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    do_step(0, 1, 1);
    check(idx_a[0] == 1 && idx_b[0] == 1 && idx_a[1] == 2 && idx_b[1] == 2 && idx_a[2] == 2 && idx_b[2] == 2, "SRF 0");
    do_step(1, 0, 1);
    check(idx_a[0] == 2 && idx_b[0] == 1 && idx_a[1] == 2 && idx_b[1] == 2 && idx_a[2] == 3 && idx_b[2] == 2, "SRF 1");
    do_step(2, 0, 0);
    check(idx_a[0] == 2 && idx_b[0] == 0 && idx_a[1] == 3 && idx_b[1] == 0 && idx_a[2] == 3 && idx_b[2] == 0, "SRF 2 non-active");
    // random lines of 12 rows, 10 windows each
    repeat (20) begin
      for (int c = 0; c < COLS; c++) begin
        rb[c] = $urandom_range(100);
        for (int r = 0; r < 12; r++) lines[c][r] = $urandom_range(1);
        base[c] = AW'(rb[c]);
      end
      for (int s = 0; s < 10; s++) begin
        automatic bit act = $urandom_range(1);
        @(negedge clk);
        for (int c = 0; c < COLS; c++) for (int r = 0; r < K; r++) win[c][r] = lines[c][s+r][0];
        new_line = (s == 0); active = act; step = 1;
        @(negedge clk); step = 0;
        for (int c = 0; c < COLS; c++) begin
          automatic int a = rb[c], b = 0;
          for (int r = 0; r < s + K; r++) a += lines[c][r];
          for (int r = s; r < s + K; r++) b += lines[c][r];
          check(int'(idx_a[c]) == a && int'(idx_b[c]) == (act ? b : 0),
                $sformatf("random col %0d srf %0d: (%0d,%0d) exp (%0d,%0d)", c, s, idx_a[c], idx_b[c], a, act ? b : 0));
        end
      end
    end
    finish_tb();
  end
endmodule
