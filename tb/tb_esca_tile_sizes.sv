// tb_esca_tile_sizes: the accelerator built for the two larger tilings of
// the zero removing study, 12x12x12 and 16x16x16 (each with its one-voxel
// halo), at reduced channel parallelism (4 input x 4 output channels per
// match, one channel group) to keep the simulation short. Each build gets
// one surface-shaped tile, the typical content of an active tile, and
// every output value and the cycle count are checked by the shared
// end-to-end checker (instantiated once per tile size).
module tb_esca_tile_sizes;
  esca_size_case #(.N(12)) u12 ();
  esca_size_case #(.N(16)) u16 ();

  initial begin
    int checks, failures;
    wait (u12.case_done && u16.case_done);
    checks = u12.checks + u16.checks;
    failures = u12.failures + u16.failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
