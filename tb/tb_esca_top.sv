// tb_esca_top: end-to-end test of the accelerator at reduced size
// (4x4x4 tiles, 4 input and 4 output channels per group, two groups each).
// Runs a dense tile (the FIFOs fill and the fetch stalls), a fully sparse
// tile (skipped by the zero removing rule) and a sparse tile with two input
// and two output channel groups (output buffer accumulation), checks every
// output value against a direct computation, checks cycle counts, and
// requires each of these mechanisms to have happened.
module tb_esca_top;
  localparam int K = 3, N = 4, M = 4, L = 4, IC_PAR = 4, OC_PAR = 4, MAX_ICG = 2, MAX_OCG = 2, FD = 4;
  `include "esca_tb_body.svh"

  esca_top #(.K(K), .N(N), .M(M), .L(L), .IC_PAR(IC_PAR), .OC_PAR(OC_PAR),
             .MAX_ICG(MAX_ICG), .MAX_OCG(MAX_OCG), .FIFO_DEPTH(FD)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
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
    load_weights(MAX_ICG, MAX_OCG);
    // dense tile, one channel group
    make_tile(60, 0); load_tile(1); run_tile(1, 1, 0, cyc);
    $display("dense tile: %0d cycles", cyc);
    // fully sparse tile interior (halo may be nonzero)
    make_tile(30, 1); load_tile(1); run_tile(1, 1, 1, cyc);
    check(cyc <= 3, "skipped tile finishes at once");
    // sparse tile, two input and two output groups
    make_tile(15, 0); load_tile(2); run_tile(2, 2, 0, cyc);
    $display("sparse tile, 2x2 groups: %0d cycles", cyc);
    $display("events: stall=%0d srf_skip=%0d tile_skip=%0d acc_pass_writes=%0d matches=%0d",
             n_stall, n_srf_skip, n_tile_skip, n_acc_pass, n_match);
    check(n_stall > 0, "fetch stall happened");
    check(n_srf_skip > 0, "non-active SRF skipped");
    check(n_tile_skip > 0, "fully sparse tile skipped");
    check(n_acc_pass > 0, "output accumulation across input groups happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
