// tb_main_controller: models the SDMU and core busy signals. Checks that
// a fully sparse tile is skipped at once, that an active tile is run as
// cfg_ocg x cfg_icg passes in the order output group outer, input group
// inner, that a new pass starts only after both units are idle, and that
// done comes after the last pass.
module tb_main_controller;
  `include "tb_util.svh"
  localparam int MI = 4, MO = 4;
  logic clk = 0, rst_n = 0, start = 0, tile_active = 0, sdmu_busy = 0, cc_busy = 0;
  logic [2:0] cfg_icg, cfg_ocg;
  logic sdmu_start, busy, done, skipped;
  logic [1:0] icg, ocg;
  always #5 clk = ~clk;
  main_controller #(.MAX_ICG(MI), .MAX_OCG(MO)) dut (.*);
  initial begin repeat (50000) @(posedge clk); failures++; finish_tb(); end

  // unit model: busy for a random time after each sdmu_start, core a bit longer
  int busy_left = 0, cc_left = 0, n_pass = 0, exp_g = 0, exp_h = 0;
  bit overlap = 0;
  always @(posedge clk) begin
    if (sdmu_start) begin
      if (sdmu_busy || cc_busy) overlap = 1;
      check(icg == 2'(exp_g) && ocg == 2'(exp_h), $sformatf("pass order g%0d h%0d exp g%0d h%0d", icg, ocg, exp_g, exp_h));
      n_pass++;
      if (exp_g + 1 < cfg_icg) exp_g++; else begin exp_g = 0; exp_h++; end
      busy_left = $urandom_range(20, 3); cc_left = busy_left + $urandom_range(3);
    end else begin
      if (busy_left > 0) busy_left--;
      if (cc_left > 0) cc_left--;
    end
    sdmu_busy <= (busy_left > 1) || sdmu_start;
    cc_busy <= (cc_left > 1) || sdmu_start;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    // skipped tile
    cfg_icg = 2; cfg_ocg = 2; tile_active = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    check(done && skipped && n_pass == 0, "fully sparse tile skipped at once");
    for (int g = 1; g <= MI; g++) for (int h = 1; h <= MO; h++) begin
      n_pass = 0; exp_g = 0; exp_h = 0;
      cfg_icg = 3'(g); cfg_ocg = 3'(h); tile_active = 1;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      check(!skipped, "active tile not skipped");
      check(n_pass == g*h, $sformatf("%0d passes for %0dx%0d", n_pass, g, h));
      check(!sdmu_busy && !cc_busy, "done only when idle");
    end
    check(!overlap, "no pass started while a unit was busy");
    finish_tb();
  end
endmodule
