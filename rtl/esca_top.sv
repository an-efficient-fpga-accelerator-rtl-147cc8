// esca_top: the on-chip logic of the submanifold sparse convolution
// accelerator.
//
// One 8x8x8 tile (plus a one-voxel halo of its neighbours) of a 3x3x3
// submanifold sparse convolution layer is processed at a time. The load
// side writes the tile's index mask (one plane per write), its nonzero
// activations (into K*K banks) and the layer's weights; `start` then lets
// the main controller skip the tile if it is fully sparse, or run the
// sparse data matching unit (SDMU) and the computing core (CC) once per
// channel-group pair. Results for the tile's nonzero voxels, in SRF order,
// collect in the output buffer, read back through the out_rd port. The
// DRAM and the bus of the paper sit outside: their traffic is the load and
// read ports here. Structure follows the paper's overall architecture
// figure; port protocol and memory layouts are this design's choices (see
// the sub-modules).
//
// Lint's note on rst_n as both synchronous and asynchronous comes from
// the assertions in the sub-modules (their reset disable condition).
module esca_top #(
  parameter int K       = esca_pkg::K,
  parameter int N       = esca_pkg::TILE_N,
  parameter int M       = esca_pkg::TILE_M,
  parameter int L       = esca_pkg::TILE_L,
  parameter int IC_PAR  = esca_pkg::IC_PAR,
  parameter int OC_PAR  = esca_pkg::OC_PAR,
  parameter int ACT_W   = esca_pkg::ACT_W,
  parameter int WGT_W   = esca_pkg::WGT_W,
  parameter int ACC_W   = esca_pkg::ACC_W,
  parameter int MAX_ICG = esca_pkg::MAX_ICG,
  parameter int MAX_OCG = esca_pkg::MAX_OCG,
  parameter int FIFO_DEPTH = 8,
  localparam int XD = N + 2, localparam int YD = M + 2, localparam int ZD = L + 2,
  localparam int NB = K*K,
  localparam int BKW = $clog2(NB),
  localparam int ZW = $clog2(ZD),
  localparam int BANK_LINES = ((XD + K - 1) / K) * ((YD + K - 1) / K),
  localparam int ADW = $clog2(BANK_LINES * ZD * MAX_ICG),
  localparam int WDW = $clog2(K * MAX_ICG * MAX_OCG),
  localparam int AVW = IC_PAR * ACT_W,
  localparam int WBW = OC_PAR * IC_PAR * WGT_W,
  localparam int OW = $clog2(N*M*L + 1),
  localparam int ODW = $clog2(N*M*L * MAX_OCG),
  localparam int GCW = $clog2(MAX_ICG + 1),
  localparam int HCW = $clog2(MAX_OCG + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // tile and weight loading (from the off-chip side)
  input  logic              tile_clear,        // a new tile's mask follows
  input  logic              mask_wr_en,
  input  logic [ZW-1:0]     mask_wr_plane,
  input  logic [XD*YD-1:0]  mask_wr_data,
  input  logic              act_wr_en,
  input  logic [BKW-1:0]    act_wr_bank,
  input  logic [ADW-1:0]    act_wr_addr,
  input  logic [AVW-1:0]    act_wr_data,
  input  logic              wgt_wr_en,
  input  logic [BKW-1:0]    wgt_wr_bank,
  input  logic [WDW-1:0]    wgt_wr_addr,
  input  logic [WBW-1:0]    wgt_wr_data,
  // layer configuration and control
  input  logic [GCW-1:0]    cfg_icg,
  input  logic [HCW-1:0]    cfg_ocg,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic              tile_skipped,
  output logic [OW-1:0]     out_count,
  // output buffer read (to the off-chip side)
  input  logic              out_rd_en,
  input  logic [ODW-1:0]    out_rd_addr,
  output logic [OC_PAR-1:0][ACC_W-1:0] out_rd_data,
  // events, for performance counting
  output logic              ev_stall,
  output logic              ev_srf_skip
);
  localparam int GW = (MAX_ICG > 1) ? $clog2(MAX_ICG) : 1;
  localparam int HW = (MAX_OCG > 1) ? $clog2(MAX_OCG) : 1;

  logic tile_active, sdmu_start, sdmu_busy, cc_busy;
  logic [GW-1:0] icg;
  logic [HW-1:0] ocg;
  logic m_valid, m_first, m_last;
  logic [AVW-1:0] m_act;
  logic [WBW-1:0] m_wgt;
  logic [OW-1:0]  m_idx, r_idx;
  logic r_valid;
  logic [OC_PAR-1:0][ACC_W-1:0] r_data;

  tile_zero_detector #(.XD(XD), .YD(YD), .ZD(ZD)) u_zero (
    .clk, .rst_n, .clear(tile_clear), .wr_en(mask_wr_en), .wr_plane(mask_wr_plane),
    .wr_data(mask_wr_data), .tile_active);

  main_controller #(.MAX_ICG(MAX_ICG), .MAX_OCG(MAX_OCG)) u_ctrl (
    .clk, .rst_n, .start, .cfg_icg, .cfg_ocg, .tile_active, .sdmu_busy, .cc_busy,
    .sdmu_start, .icg, .ocg, .busy, .done, .skipped(tile_skipped));

  sdmu #(.K(K), .N(N), .M(M), .L(L), .IC_PAR(IC_PAR), .OC_PAR(OC_PAR), .ACT_W(ACT_W),
         .WGT_W(WGT_W), .MAX_ICG(MAX_ICG), .MAX_OCG(MAX_OCG), .FIFO_DEPTH(FIFO_DEPTH)) u_sdmu (
    .clk, .rst_n, .mask_wr_en, .mask_wr_plane, .mask_wr_data,
    .act_wr_en, .act_wr_bank, .act_wr_addr, .act_wr_data,
    .wgt_wr_en, .wgt_wr_bank, .wgt_wr_addr, .wgt_wr_data,
    .start(sdmu_start), .icg, .ocg, .busy(sdmu_busy), .out_count,
    .m_valid, .m_act, .m_wgt, .m_first, .m_last, .m_idx,
    .stall(ev_stall), .srf_skip(ev_srf_skip));

  computing_core #(.IC_PAR(IC_PAR), .OC_PAR(OC_PAR), .ACT_W(ACT_W), .WGT_W(WGT_W),
                   .ACC_W(ACC_W), .OW(OW)) u_cc (
    .clk, .rst_n, .in_valid(m_valid), .in_act(m_act), .in_wgt(m_wgt), .in_first(m_first),
    .in_last(m_last), .in_idx(m_idx), .out_valid(r_valid), .out_data(r_data), .out_idx(r_idx),
    .busy(cc_busy));

  output_buffer #(.DEPTH(N*M*L*MAX_OCG), .OC_PAR(OC_PAR), .ACC_W(ACC_W)) u_out (
    .clk, .wr_en(r_valid), .accumulate(icg != '0),
    .wr_addr(ODW'(int'(r_idx) * MAX_OCG + int'(ocg))), .wr_data(r_data),
    .rd_en(out_rd_en), .rd_addr(out_rd_addr), .rd_data(out_rd_data));
endmodule
