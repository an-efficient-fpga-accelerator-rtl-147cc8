// Shared body of the end-to-end testbenches of esca_top.
//
// The including module defines localparams K, N, M, L, IC_PAR, OC_PAR,
// MAX_ICG, MAX_OCG, FD (FIFO depth) and instantiates the design as `dut` with the signals
// declared here. A random sparse tile with a one-voxel halo, random
// activations and weights are generated; the tile is loaded in the banked
// layout the design expects; the expected output of the 3x3x3 submanifold
// convolution is computed directly from the dense arrays (for every nonzero
// voxel of the tile interior, in x, y, z order, sum over its nonzero
// neighbours of activation times weight) and compared with the output
// buffer.
localparam int XD = N + 2, YD = M + 2, ZD = L + 2;
localparam int NB = K * K;
localparam int ACT_W = 16, WGT_W = 8, ACC_W = 32;
localparam int AVW = IC_PAR * ACT_W, WBW = OC_PAR * IC_PAR * WGT_W;
localparam int BANK_LINES = ((XD + K - 1) / K) * ((YD + K - 1) / K);
localparam int ADW = $clog2(BANK_LINES * ZD * MAX_ICG);
localparam int WDW = $clog2(K * MAX_ICG * MAX_OCG);
localparam int OW  = $clog2(N * M * L + 1);
localparam int ODW = $clog2(N * M * L * MAX_OCG);
localparam int NIC = IC_PAR * MAX_ICG, NOC = OC_PAR * MAX_OCG;

logic clk = 1'b0, rst_n = 1'b0;
logic tile_clear, mask_wr_en, act_wr_en, wgt_wr_en, start, busy, done, tile_skipped;
logic [$clog2(ZD)-1:0] mask_wr_plane;
logic [XD*YD-1:0]      mask_wr_data;
logic [$clog2(NB)-1:0] act_wr_bank, wgt_wr_bank;
logic [ADW-1:0]        act_wr_addr;
logic [AVW-1:0]        act_wr_data;
logic [WDW-1:0]        wgt_wr_addr;
logic [WBW-1:0]        wgt_wr_data;
logic [$clog2(MAX_ICG+1)-1:0] cfg_icg;
logic [$clog2(MAX_OCG+1)-1:0] cfg_ocg;
logic [OW-1:0]         out_count;
logic                  out_rd_en;
logic [ODW-1:0]        out_rd_addr;
logic [OC_PAR-1:0][ACC_W-1:0] out_rd_data;
logic ev_stall, ev_srf_skip;

always #5 clk = ~clk;

int checks = 0, failures = 0;
int n_stall = 0, n_srf_skip = 0, n_tile_skip = 0, n_acc_pass = 0, n_match = 0;
bit mask [XD][YD][ZD];
int act  [XD][YD][ZD][NIC];
int wgt  [K][K][K][NIC][NOC];

always @(posedge clk) begin
  if (ev_stall) n_stall++;
  if (ev_srf_skip) n_srf_skip++;
  if (dut.u_cc.out_valid && dut.icg != 0) n_acc_pass++;
  if (dut.u_sdmu.m_valid) n_match++;
end

task automatic check(input bit ok, input string what);
  checks++;
  if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
endtask

task automatic idle_inputs();
  tile_clear = 0; mask_wr_en = 0; act_wr_en = 0; wgt_wr_en = 0; start = 0; out_rd_en = 0;
  mask_wr_plane = '0; mask_wr_data = '0; act_wr_bank = '0; act_wr_addr = '0; act_wr_data = '0;
  wgt_wr_bank = '0; wgt_wr_addr = '0; wgt_wr_data = '0; out_rd_addr = '0;
endtask

// density in percent; interior_empty forces a fully sparse tile interior
task automatic make_tile(input int density, input bit interior_empty);
  for (int x = 0; x < XD; x++) for (int y = 0; y < YD; y++) for (int z = 0; z < ZD; z++) begin
    bit in_tile = x > 0 && x < XD-1 && y > 0 && y < YD-1 && z > 0 && z < ZD-1;
    mask[x][y][z] = ($urandom_range(99) < density) && !(interior_empty && in_tile);
    for (int i = 0; i < NIC; i++) act[x][y][z][i] = mask[x][y][z] ? $urandom_range(200) - 100 : 0;
  end
endtask

// A surface patch, the typical shape of a voxelised object boundary: the
// voxels at depth z = z0 + (sx*x + sy*y)/4 (and, with 50 % chance, the one
// below) are occupied across the whole tile including its halo.
task automatic make_surface_tile(input int z0, input int sx, input int sy);
  for (int x = 0; x < XD; x++) for (int y = 0; y < YD; y++) begin
    int zs = z0 + (sx*x + sy*y) / 4;
    for (int z = 0; z < ZD; z++) begin
      mask[x][y][z] = (z == zs) || (z == zs - 1 && $urandom_range(1) == 1);
      for (int i = 0; i < NIC; i++) act[x][y][z][i] = mask[x][y][z] ? $urandom_range(200) - 100 : 0;
    end
  end
endtask

task automatic make_weights();
  for (int a = 0; a < K; a++) for (int b = 0; b < K; b++) for (int c = 0; c < K; c++)
    for (int i = 0; i < NIC; i++) for (int o = 0; o < NOC; o++)
      wgt[a][b][c][i][o] = $urandom_range(40) - 20;
endtask

task automatic load_weights(input int ng, input int nh);
  for (int dx = 0; dx < K; dx++) for (int dy = 0; dy < K; dy++) for (int dz = 0; dz < K; dz++)
    for (int g = 0; g < ng; g++) for (int h = 0; h < nh; h++) begin
      @(negedge clk);
      wgt_wr_en = 1; wgt_wr_bank = $clog2(NB)'(dx*K+dy);
      wgt_wr_addr = WDW'((dz*MAX_ICG + g)*MAX_OCG + h);
      for (int m = 0; m < OC_PAR; m++) for (int n = 0; n < IC_PAR; n++)
        wgt_wr_data[(m*IC_PAR+n)*WGT_W +: WGT_W] = WGT_W'(wgt[dx][dy][dz][g*IC_PAR+n][h*OC_PAR+m]);
    end
  @(negedge clk); wgt_wr_en = 0;
endtask

task automatic load_tile(input int ng);
  int cnt [NB];
  @(negedge clk); tile_clear = 1;
  @(negedge clk); tile_clear = 0;
  for (int z = 0; z < ZD; z++) begin
    @(negedge clk);
    mask_wr_en = 1; mask_wr_plane = $clog2(ZD)'(z);
    for (int x = 0; x < XD; x++) for (int y = 0; y < YD; y++) mask_wr_data[x*YD+y] = mask[x][y][z];
  end
  @(negedge clk); mask_wr_en = 0;
  foreach (cnt[b]) cnt[b] = 0;
  for (int x = 0; x < XD; x++) for (int y = 0; y < YD; y++) begin
    int b = (x % K) * K + (y % K);
    for (int z = 0; z < ZD; z++) if (mask[x][y][z]) begin
      for (int g = 0; g < ng; g++) begin
        @(negedge clk);
        act_wr_en = 1; act_wr_bank = $clog2(NB)'(b); act_wr_addr = ADW'(cnt[b]*MAX_ICG + g);
        for (int n = 0; n < IC_PAR; n++) act_wr_data[n*ACT_W +: ACT_W] = ACT_W'(act[x][y][z][g*IC_PAR+n]);
      end
      cnt[b]++;
    end
  end
  @(negedge clk); act_wr_en = 0;
endtask

// Run one tile; returns the cycles from start to done.
task automatic run_tile(input int ng, input int nh, input bit expect_skip, output int cycles);
  int idx, st0;
  int expv [NOC];
  cfg_icg = $bits(cfg_icg)'(ng); cfg_ocg = $bits(cfg_ocg)'(nh);
  st0 = n_stall;
  @(negedge clk); start = 1;
  @(negedge clk); start = 0;
  cycles = 1;
  while (!done) begin @(negedge clk); cycles++; end
  check(tile_skipped == expect_skip, "tile skip flag");
  if (expect_skip) begin n_tile_skip++; return; end
  idx = 0;
  for (int x = 1; x <= N; x++) for (int y = 1; y <= M; y++) for (int z = 1; z <= L; z++)
    if (mask[x][y][z]) begin
      foreach (expv[o]) begin
        expv[o] = 0;
        if (o < nh*OC_PAR)
          for (int dx = 0; dx < K; dx++) for (int dy = 0; dy < K; dy++) for (int dz = 0; dz < K; dz++)
            if (mask[x+dx-K/2][y+dy-K/2][z+dz-K/2])
              for (int i = 0; i < ng*IC_PAR; i++)
                expv[o] += act[x+dx-K/2][y+dy-K/2][z+dz-K/2][i] * wgt[dx][dy][dz][i][o];
      end
      for (int h = 0; h < nh; h++) begin
        @(negedge clk); out_rd_en = 1; out_rd_addr = ODW'(idx*MAX_OCG + h);
        @(negedge clk); out_rd_en = 0;
        for (int m = 0; m < OC_PAR; m++)
          check($signed(out_rd_data[m]) == expv[h*OC_PAR+m],
                $sformatf("out idx %0d oc %0d got %0d exp %0d", idx, h*OC_PAR+m,
                          $signed(out_rd_data[m]), expv[h*OC_PAR+m]));
      end
      idx++;
    end
  check(int'(out_count) == idx, $sformatf("out_count %0d exp %0d", out_count, idx));
  // Fig. 7(b) rate: one SRF per K cycles in each pass, plus the line-base
  // pre-pass, pipeline fill/drain and stalls.
  check(cycles >= ng*nh*K*N*M*L, "cycle count lower bound");
  // After the last fetch the FIFO group (NB*FD matches) and the descriptor
  // queue (one extra cycle per group) still drain.
  check(cycles <= ng*nh*(ZD + XD*YD + K*(N*M*L + 2) + 12 + NB*FD + 8) + (n_stall - st0),
        $sformatf("cycle count upper bound: %0d", cycles));
endtask
