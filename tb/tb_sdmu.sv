// tb_sdmu: loads random 4x4x4 tiles (with halo) into the SDMU, runs a
// matching pass for a chosen channel-group pair and compares the match
// stream with the reference: for each nonzero centre in x, y, z order, its
// match group lists, column by column and top to bottom, every nonzero
// neighbour's activation entry with the weight block of that kernel tap,
// first/last flagged and carrying the group's index. A dense tile makes the
// fetch stall on full FIFOs.
module tb_sdmu;
  `include "tb_util.svh"
  localparam int K = 3, N = 4, M = 4, L = 4, IC = 2, OC = 2, MI = 2, MO = 2, FD = 4;
  localparam int XD = N+2, YD = M+2, ZD = L+2, NB = K*K;
  localparam int AVW = IC*16, WBW = OC*IC*8;
  localparam int ADW = $clog2(4*ZD*MI), WDW = $clog2(K*MI*MO), OW = $clog2(N*M*L+1);
  logic clk = 0, rst_n = 0;
  logic mask_wr_en = 0, act_wr_en = 0, wgt_wr_en = 0, start = 0;
  logic [2:0] mask_wr_plane;
  logic [XD*YD-1:0] mask_wr_data;
  logic [3:0] act_wr_bank, wgt_wr_bank;
  logic [ADW-1:0] act_wr_addr;
  logic [AVW-1:0] act_wr_data;
  logic [WDW-1:0] wgt_wr_addr;
  logic [WBW-1:0] wgt_wr_data;
  logic icg, ocg, busy, m_valid, m_first, m_last, stall, srf_skip;
  logic [OW-1:0] out_count, m_idx;
  logic [AVW-1:0] m_act;
  logic [WBW-1:0] m_wgt;
  always #5 clk = ~clk;
  sdmu #(.K(K), .N(N), .M(M), .L(L), .IC_PAR(IC), .OC_PAR(OC), .MAX_ICG(MI), .MAX_OCG(MO), .FIFO_DEPTH(FD)) dut (.*);
  initial begin repeat (200000) @(posedge clk); failures++; finish_tb(); end

  bit mask [XD][YD][ZD];
  logic [AVW-1:0] act [XD][YD][ZD][MI];
  logic [WBW-1:0] wgt [NB][K][MI][MO];
  typedef struct { logic [AVW-1:0] a; logic [WBW-1:0] w; bit f, l; int idx; } m_t;
  m_t expq [$];
  int n_stall = 0, n_skip = 0, n_match = 0;

  always @(posedge clk) if (rst_n) begin
    if (stall) n_stall++;
    if (srf_skip) n_skip++;
    if (m_valid) begin
      n_match++;
      if (expq.size() == 0) check(0, "unexpected match");
      else begin
        automatic m_t e = expq.pop_front();
        check(m_act == e.a && m_wgt == e.w && m_first == e.f && m_last == e.l && int'(m_idx) == e.idx,
              $sformatf("match idx %0d (exp %0d) f%0d l%0d", m_idx, e.idx, m_first, m_last));
      end
    end
  end

  task automatic run(input int density, input int g, input int h);
    int cnt [NB], idx = 0;
    for (int x = 0; x < XD; x++) for (int y = 0; y < YD; y++) for (int z = 0; z < ZD; z++) begin
      mask[x][y][z] = $urandom_range(99) < density;
      for (int i = 0; i < MI; i++) act[x][y][z][i] = AVW'($urandom());
    end
    for (int z = 0; z < ZD; z++) begin
      @(negedge clk); mask_wr_en = 1; mask_wr_plane = 3'(z);
      for (int x = 0; x < XD; x++) for (int y = 0; y < YD; y++) mask_wr_data[x*YD+y] = mask[x][y][z];
    end
    @(negedge clk); mask_wr_en = 0;
    foreach (cnt[b]) cnt[b] = 0;
    for (int x = 0; x < XD; x++) for (int y = 0; y < YD; y++) for (int z = 0; z < ZD; z++)
      if (mask[x][y][z]) begin
        int b = (x%K)*K + y%K;
        for (int i = 0; i < MI; i++) begin
          @(negedge clk); act_wr_en = 1; act_wr_bank = 4'(b); act_wr_addr = ADW'(cnt[b]*MI + i); act_wr_data = act[x][y][z][i];
        end
        cnt[b]++;
      end
    @(negedge clk); act_wr_en = 0;
    for (int x = 1; x <= N; x++) for (int y = 1; y <= M; y++) for (int z = 1; z <= L; z++)
      if (mask[x][y][z]) begin
        int tot = 0, k = 0;
        for (int c = 0; c < NB; c++) for (int r = 0; r < K; r++) tot += mask[x+c/K-1][y+c%K-1][z+r-1];
        for (int c = 0; c < NB; c++) for (int r = 0; r < K; r++)
          if (mask[x+c/K-1][y+c%K-1][z+r-1]) begin
            m_t e;
            e.a = act[x+c/K-1][y+c%K-1][z+r-1][g]; e.w = wgt[c][r][g][h];
            e.f = (k == 0); e.l = (k == tot-1); e.idx = idx;
            expq.push_back(e); k++;
          end
        idx++;
      end
    @(negedge clk); start = 1; icg = 1'(g); ocg = 1'(h);
    @(negedge clk); start = 0;
    @(negedge clk);
    while (busy) @(negedge clk);
    check(expq.size() == 0, "all matches delivered");
    check(int'(out_count) == idx, "out_count");
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int c = 0; c < NB; c++) for (int r = 0; r < K; r++) for (int g = 0; g < MI; g++) for (int h = 0; h < MO; h++) begin
      wgt[c][r][g][h] = WBW'($urandom());
      @(negedge clk); wgt_wr_en = 1; wgt_wr_bank = 4'(c); wgt_wr_addr = WDW'((r*MI + g)*MO + h); wgt_wr_data = wgt[c][r][g][h];
    end
    @(negedge clk); wgt_wr_en = 0;
    run(20, 0, 0);
    run(70, 1, 0);
    run(35, 1, 1);
    $display("matches=%0d stalls=%0d skipped SRFs=%0d", n_match, n_stall, n_skip);
    check(n_stall > 0, "fetch stalled on full FIFOs");
    check(n_skip > 0, "non-active SRFs skipped");
    finish_tb();
  end
endmodule
