// tb_esca_full: one complete tile operation of esca_top at its default
// size: 8x8x8 tile with halo, 16 input x 16 output channels per match,
// up to eight channel groups each. A sparse random tile is convolved with
// two input and two output channel groups (32 -> 32 channels); every output
// value and the cycle count are checked.
module tb_esca_full;
  localparam int K = 3, N = 8, M = 8, L = 8, IC_PAR = 16, OC_PAR = 16, MAX_ICG = 8, MAX_OCG = 8, FD = 8;
  `include "esca_tb_body.svh"

  esca_top dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    idle_inputs();
    cfg_icg = 1; cfg_ocg = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    make_weights();
    load_weights(2, 2);
    make_tile(8, 0); load_tile(2); run_tile(2, 2, 0, cyc);
    $display("full-size tile, 2x2 channel groups: %0d cycles, %0d matches, %0d stall cycles",
             cyc, n_match, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
