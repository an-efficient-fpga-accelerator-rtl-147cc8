// decoder: controller of the matching operation, with the state index
// generator and the address generator of the sparse data matching unit.
//
// After `start` the line-base pre-pass runs (line_base_table), then every
// voxel of the tile interior becomes the centre of one sparse receptive
// field (SRF), in the order x outer, y, z inner (z is the column direction,
// so consecutive SRFs slide down the K*K columns by one voxel). Each SRF goes
// through three pipeline steps of K cycles each, as in the paper's pipeline
// figure: read masks and judge state (mask_judger), generate state index
// (state_index_generator, updated at the end of the step), fetch
// (address_generator, one window row per cycle). In the fetch step of an
// active SRF, lane c drives rd_en/rd_addr/rd_bank for the activation bank of
// its column and rd_row names the kernel depth, so that the weight of the
// match is tap (c, rd_row). A match group descriptor (the B of each column
// and the output index) is pushed in the first fetch cycle. Non-active SRFs
// skip the fetch. Stall: at the start of a fetch step the pipeline waits
// until every FIFO has room for the column's B matches plus one in flight,
// and the descriptor queue has room. One SRF leaves the pipeline every K
// cycles when nothing stalls. The slot-locked three-step pipeline follows
// the paper; the stall rule and traversal order are this design's choices.
//
// The lower end A-B of each column's address fragment (frag_lo) is left
// unconnected: the per-row addresses already include it. Lint also notes
// that rst_n is used both as asynchronous reset and, through the
// assertion's disable condition, synchronously; that is intended.
module decoder #(
  parameter int K  = esca_pkg::K,
  parameter int N  = esca_pkg::TILE_N,
  parameter int M  = esca_pkg::TILE_M,
  parameter int L  = esca_pkg::TILE_L,
  parameter int AW = 8,
  parameter int FCW = 4,              // width of the FIFO free counts
  localparam int XD = N + 2, localparam int YD = M + 2, localparam int ZD = L + 2,
  localparam int COLS = K*K,
  localparam int XW = $clog2(XD), localparam int YW = $clog2(YD), localparam int ZW = $clog2(ZD),
  localparam int BW = $clog2(K + 1),
  localparam int RW = (K > 1) ? $clog2(K) : 1,
  localparam int BKW = $clog2(COLS),
  localparam int OW = $clog2(N*M*L + 1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  // mask buffer, two read ports
  output logic [ZW-1:0]             mask_plane_a,
  input  logic [XD*YD-1:0]          mask_data_a,
  output logic [ZW-1:0]             mask_plane_b,
  input  logic [XD*YD-1:0]          mask_data_b,
  // room in the FIFO group and descriptor queue
  input  logic [COLS-1:0][FCW-1:0]  fifo_free,
  input  logic                      desc_room,
  // fetch requests
  output logic [COLS-1:0]           rd_en,
  output logic [COLS-1:0][AW-1:0]   rd_addr,
  output logic [COLS-1:0][BKW-1:0]  rd_bank,
  output logic [RW-1:0]             rd_row,
  // match group descriptor
  output logic                      desc_push,
  output logic [COLS-1:0][BW-1:0]   desc_cnt,
  output logic [OW-1:0]             desc_idx,
  // status
  output logic                      busy,
  output logic                      issue_done,
  output logic [OW-1:0]             out_count,
  output logic                      stall,
  output logic                      srf_skip     // a non-active SRF left the fetch step
);
  typedef enum logic [1:0] {IDLE, PREP, RUN} state_t;
  state_t state;

  logic [RW-1:0] t;
  // stage R (read and judge), G (generate), F (fetch)
  logic          vr, vg, vf;
  logic [XW-1:0] xr, xg, xf;
  logic [YW-1:0] yr, yg, yf;
  logic [ZW-1:0] zr, zg;
  logic [COLS-1:0][K-1:0] win_g, win_f;
  logic          act_g, act_f;
  logic [OW-1:0] oidx;

  logic [COLS-1:0][K-1:0] win_next;
  logic                   judged_active;
  logic [XD*YD-1:0][AW-1:0] base_tbl;
  logic                   lbt_done;
  logic [COLS-1:0][AW-1:0] base_g, idx_a, frag_lo;
  logic [COLS-1:0][BW-1:0] idx_b;
  logic go, adv, room_ok, sample, fetch;

  line_base_table #(.K(K), .XD(XD), .YD(YD), .ZD(ZD), .AW(AW)) u_lbt (
    .clk, .rst_n, .start(start && state == IDLE), .rd_plane(mask_plane_b),
    .plane(mask_data_b), .base(base_tbl), .done(lbt_done));

  mask_judger #(.K(K), .XD(XD), .YD(YD)) u_judger (
    .clk, .sample, .row(t), .cx(xr), .cy(yr), .plane(mask_data_a),
    .win_next, .active(judged_active));

  always_comb
    for (int dx = 0; dx < K; dx++)
      for (int dy = 0; dy < K; dy++)
        base_g[dx*K+dy] = base_tbl[(int'(xg) + dx - K/2) * YD + (int'(yg) + dy - K/2)];

  state_index_generator #(.K(K), .AW(AW)) u_sig (
    .clk, .rst_n, .step(adv && vg), .new_line(int'(zg) == 1), .active(act_g),
    .win(win_g), .base(base_g), .idx_a, .idx_b);

  address_generator #(.K(K), .AW(AW)) u_agen (
    .active(fetch), .row(t), .win(win_f), .idx_a, .idx_b,
    .frag_lo, .rd_en, .rd_addr);

  always_comb begin
    room_ok = desc_room;
    for (int c = 0; c < COLS; c++)
      if (int'(fifo_free[c]) < int'(idx_b[c]) + 1) room_ok = 1'b0;
  end

  assign stall  = (state == RUN) && (t == '0) && vf && act_f && !room_ok;
  assign go     = (state == RUN) && !stall;
  assign adv    = go && (int'(t) == K-1);
  assign sample = go && vr;
  assign fetch  = go && vf && act_f;
  assign mask_plane_a = ZW'(int'(zr) - K/2 + int'(t));
  assign rd_row = t;

  always_comb
    for (int dx = 0; dx < K; dx++)
      for (int dy = 0; dy < K; dy++)
        rd_bank[dx*K+dy] = BKW'(esca_pkg::line_bank(int'(xf) + dx - K/2, int'(yf) + dy - K/2, K));

  assign desc_push = fetch && (t == '0);
  assign desc_cnt  = idx_b;
  assign desc_idx  = oidx;
  assign busy      = (state != IDLE);
  assign out_count = oidx;
  assign srf_skip  = adv && vf && !act_f;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state <= IDLE; t <= '0; issue_done <= 1'b0;
      vr <= 1'b0; vg <= 1'b0; vf <= 1'b0;
      xr <= '0; yr <= '0; zr <= '0; xg <= '0; yg <= '0; zg <= '0; xf <= '0; yf <= '0;
      win_g <= '0; win_f <= '0; act_g <= 1'b0; act_f <= 1'b0; oidx <= '0;
    end else begin
      issue_done <= 1'b0;
      case (state)
        IDLE: if (start) begin
          state <= PREP; oidx <= '0;
        end
        PREP: if (lbt_done) begin
          state <= RUN; t <= '0;
          vr <= 1'b1; vg <= 1'b0; vf <= 1'b0;
          xr <= XW'(1); yr <= YW'(1); zr <= ZW'(1);
        end
        RUN: if (go) begin
          if (desc_push) oidx <= oidx + 1'b1;
          if (adv) begin
            t <= '0;
            vf <= vg; xf <= xg; yf <= yg; win_f <= win_g; act_f <= act_g;
            vg <= vr; xg <= xr; yg <= yr; zg <= zr; win_g <= win_next; act_g <= judged_active;
            if (vr) begin
              if (int'(zr) < L) zr <= zr + 1'b1;
              else begin
                zr <= ZW'(1);
                if (int'(yr) < M) yr <= yr + 1'b1;
                else begin
                  yr <= YW'(1);
                  if (int'(xr) < N) xr <= xr + 1'b1;
                  else vr <= 1'b0;
                end
              end
            end
            if (!vr && !vg) begin   // the SRF in F is the last one
              state <= IDLE; issue_done <= 1'b1; vf <= 1'b0;
            end
          end else
            t <= t + 1'b1;
        end
        default: state <= IDLE;
      endcase
    end

  a_fetch_in_window: assert property (@(posedge clk) disable iff (!rst_n)
    fetch |-> (rd_en == '0) || (idx_b != '0));
endmodule
