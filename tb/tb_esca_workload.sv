// tb_esca_workload: a short stream of tiles as they arrive from a voxelised
// point cloud, at the default size (8x8x8 tiles with halo, 16 input and 16
// output channels). Object surfaces give tiles crossed by a thin sheet of
// occupied voxels; most tiles of the grid hold nothing and are skipped by
// the zero removing rule. The stream mixes three surface tiles of
// different slopes with fully sparse tiles (whose halo may still hold
// voxels of the neighbouring surface). Every output value and every cycle
// count is checked by the shared end-to-end checker, and the cycles per
// tile are reported.
module tb_esca_workload;
  localparam int K = 3, N = 8, M = 8, L = 8, IC_PAR = 16, OC_PAR = 16, MAX_ICG = 8, MAX_OCG = 8, FD = 8;
  `include "esca_tb_body.svh"

  esca_top dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, total, n_active;
    idle_inputs();
    cfg_icg = 1; cfg_ocg = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    make_weights();
    load_weights(1, 1);
    total = 0; n_active = 0;
    for (int t = 0; t < 6; t++) begin
      if (t % 2 == 1) begin
        make_tile(3, 1); load_tile(1); run_tile(1, 1, 1, cyc);
        $display("tile %0d: fully sparse, %0d cycles", t, cyc);
      end else begin
        make_surface_tile(2 + int'($urandom_range(2)), int'($urandom_range(3)), int'($urandom_range(3)));
        load_tile(1); run_tile(1, 1, 0, cyc);
        n_active++;
        $display("tile %0d: surface, %0d outputs, %0d cycles", t, dut.out_count, cyc);
      end
      total += cyc;
    end
    check(n_tile_skip == 3, "three fully sparse tiles skipped");
    $display("stream of 6 tiles (%0d active): %0d cycles, %0d matches", n_active, total, n_match);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
