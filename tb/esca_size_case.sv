// esca_size_case: one end-to-end run of esca_top with cubic N x N x N tiles
// and 4-channel groups, used by tb_esca_tile_sizes. It loads one tile whose
// occupied voxels form a thin sloped surface, runs one pass, compares every
// output with a direct evaluation of the convolution and checks the cycle
// count; its own watchdog counts a failure if the run never ends. Results
// are read by the parent from case_done, checks and failures.
module esca_size_case #(
  parameter int N = 12
);
  localparam int K = 3, M = N, L = N, IC_PAR = 4, OC_PAR = 4, MAX_ICG = 2, MAX_OCG = 2, FD = 4;
  bit case_done = 0;
  `include "esca_tb_body.svh"

  esca_top #(.K(K), .N(N), .M(M), .L(L), .IC_PAR(IC_PAR), .OC_PAR(OC_PAR),
             .MAX_ICG(MAX_ICG), .MAX_OCG(MAX_OCG), .FIFO_DEPTH(FD)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired at tile size %0d", N);
    case_done = 1;
  end

  initial begin
    int cyc;
    idle_inputs();
    cfg_icg = 1; cfg_ocg = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    make_weights();
    load_weights(1, 1);
    make_surface_tile(N / 3, int'($urandom_range(1, 3)), int'($urandom_range(1, 3)));
    load_tile(1); run_tile(1, 1, 0, cyc);
    $display("tile %0dx%0dx%0d: %0d outputs, %0d matches, %0d cycles", N, N, N, dut.out_count, n_match, cyc);
    case_done = 1;
  end
endmodule
