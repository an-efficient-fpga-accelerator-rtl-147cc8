// tb_decoder: drives the decoder with a mask buffer holding random 4x4x4
// tiles (with halo). Every fetch cycle of every active SRF is compared with
// the bank and address the banked activation layout gives for each nonzero
// neighbour; every descriptor with the per-column counts. The matching
// phase must last exactly K cycles per SRF plus two pipeline-fill slots
// (the three K-cycle steps of the pipeline), plus stall cycles when the
// FIFO room is withheld.
module tb_decoder;
  `include "tb_util.svh"
  localparam int K = 3, N = 4, M = 4, L = 4, XD = N+2, YD = M+2, ZD = L+2, NB = K*K, AW = 8, FCW = 4, OW = 7;
  logic clk = 0, rst_n = 0, start = 0;
  logic [2:0] mask_plane_a, mask_plane_b, wr_plane;
  logic [XD*YD-1:0] mask_data_a, mask_data_b, wr_data;
  logic wr_en = 0;
  logic [NB-1:0][FCW-1:0] fifo_free;
  logic desc_room;
  logic [NB-1:0] rd_en;
  logic [NB-1:0][AW-1:0] rd_addr;
  logic [NB-1:0][3:0] rd_bank;
  logic [1:0] rd_row;
  logic desc_push, busy, issue_done, stall, srf_skip;
  logic [NB-1:0][1:0] desc_cnt;
  logic [OW-1:0] desc_idx, out_count;
  always #5 clk = ~clk;

  mask_buffer #(.XD(XD), .YD(YD), .ZD(ZD)) u_mask (.clk, .wr_en, .wr_plane, .wr_data,
    .rd_plane_a(mask_plane_a), .rd_data_a(mask_data_a), .rd_plane_b(mask_plane_b), .rd_data_b(mask_data_b));
  decoder #(.K(K), .N(N), .M(M), .L(L), .AW(AW), .FCW(FCW)) dut (.*);
  initial begin repeat (100000) @(posedge clk); failures++; finish_tb(); end

  bit mask [XD][YD][ZD];
  int addr_of [XD][YD][ZD];
  typedef struct { logic [NB-1:0] en; logic [NB-1:0][3:0] bank; logic [NB-1:0][AW-1:0] addr; int row; } fetch_t;
  fetch_t expf [$];
  int expd [$][NB];
  int run_cycles, n_stall, n_skip;
  bit hold_room;

  always @(posedge clk) if (rst_n) begin
    if (dut.state == 2'd2) run_cycles++;
    if (stall) n_stall++;
    if (srf_skip) n_skip++;
    if (dut.fetch) begin
      if (expf.size() == 0) check(0, "unexpected fetch");
      else begin
        automatic fetch_t e = expf.pop_front();
        check(rd_en == e.en && int'(rd_row) == e.row, $sformatf("fetch enables %b row %0d, exp %b row %0d", rd_en, rd_row, e.en, e.row));
        for (int c = 0; c < NB; c++) if (e.en[c])
          check(rd_bank[c] == e.bank[c] && rd_addr[c] == e.addr[c], $sformatf("col %0d bank/addr", c));
      end
    end
    if (desc_push) begin
      if (expd.size() == 0) check(0, "unexpected descriptor");
      else begin
        for (int c = 0; c < NB; c++)
          check(int'(desc_cnt[c]) == expd[0][c], $sformatf("descriptor col %0d: %0d exp %0d", c, desc_cnt[c], expd[0][c]));
        void'(expd.pop_front());
      end
    end
  end

  always_comb for (int c = 0; c < NB; c++) fifo_free[c] = hold_room ? FCW'(0) : FCW'(15);
  assign desc_room = !hold_room;

  task automatic run(input int density, input bit with_stalls);
    int cnt [NB], n_act = 0, st0, t0;
    for (int x = 0; x < XD; x++) for (int y = 0; y < YD; y++) for (int z = 0; z < ZD; z++)
      mask[x][y][z] = $urandom_range(99) < density;
    for (int z = 0; z < ZD; z++) begin
      @(negedge clk); wr_en = 1; wr_plane = 3'(z);
      for (int x = 0; x < XD; x++) for (int y = 0; y < YD; y++) wr_data[x*YD+y] = mask[x][y][z];
    end
    @(negedge clk); wr_en = 0;
    foreach (cnt[b]) cnt[b] = 0;
    for (int x = 0; x < XD; x++) for (int y = 0; y < YD; y++) for (int z = 0; z < ZD; z++)
      if (mask[x][y][z]) addr_of[x][y][z] = cnt[(x%K)*K + y%K]++;
    for (int x = 1; x <= N; x++) for (int y = 1; y <= M; y++) for (int z = 1; z <= L; z++)
      if (mask[x][y][z]) begin
        int d [NB];
        n_act++;
        for (int c = 0; c < NB; c++) begin
          d[c] = 0;
          for (int r = 0; r < K; r++) d[c] += mask[x + c/K - 1][y + c%K - 1][z + r - 1];
        end
        expd.push_back(d);
        for (int r = 0; r < K; r++) begin
          fetch_t f;
          f.row = r; f.en = '0; f.bank = '0; f.addr = '0;
          for (int c = 0; c < NB; c++) begin
            int nx = x + c/K - 1, ny = y + c%K - 1, nz = z + r - 1;
            if (mask[nx][ny][nz]) begin
              f.en[c] = 1; f.bank[c] = 4'((nx%K)*K + ny%K); f.addr[c] = AW'(addr_of[nx][ny][nz]);
            end
          end
          expf.push_back(f);
        end
      end
    run_cycles = 0; st0 = n_stall; t0 = n_skip;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!issue_done) begin
      @(negedge clk);
      hold_room = with_stalls && ($urandom_range(3) == 0);
    end
    hold_room = 0;
    @(negedge clk);
    check(expf.size() == 0 && expd.size() == 0, "all fetches and descriptors issued");
    check(int'(out_count) == n_act, "out_count");
    check(n_skip - t0 == N*M*L - n_act, "non-active SRFs skipped");
    check(run_cycles == K*(N*M*L + 2) + (n_stall - st0),
          $sformatf("matching phase %0d cycles, exp %0d + %0d stalls", run_cycles, K*(N*M*L+2), n_stall - st0));
  endtask

  initial begin
    hold_room = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    run(30, 0);
    run(70, 0);
    run(40, 1);
    check(n_stall > 0, "stalls exercised");
    finish_tb();
  end
endmodule
