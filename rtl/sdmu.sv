// sdmu: the sparse data matching unit.
//
// Holds the mask, activation and weight buffers of a tile and turns the
// sparse tile into a stream of matches: the decoder walks the SRFs, judges
// them by their centre mask, generates the state index and fetches, per
// column, the activations and weights of each active SRF into the FIFO
// group; the match mux sends them on one per cycle in column order, tagged
// with the first/last flags and output index of their match group. One pass
// handles one (input-channel group, output-channel group) pair given by
// icg/ocg at `start`. `busy` stays high until the last match has left.
// Structure and names follow the paper's SDMU figure.
//
// The decoder's issue_done flag is left unconnected: busy already covers
// it. Lint's note on rst_n as both synchronous and asynchronous comes from
// the assertions in the sub-modules.
module sdmu #(
  parameter int K       = esca_pkg::K,
  parameter int N       = esca_pkg::TILE_N,
  parameter int M       = esca_pkg::TILE_M,
  parameter int L       = esca_pkg::TILE_L,
  parameter int IC_PAR  = esca_pkg::IC_PAR,
  parameter int OC_PAR  = esca_pkg::OC_PAR,
  parameter int ACT_W   = esca_pkg::ACT_W,
  parameter int WGT_W   = esca_pkg::WGT_W,
  parameter int MAX_ICG = esca_pkg::MAX_ICG,
  parameter int MAX_OCG = esca_pkg::MAX_OCG,
  parameter int FIFO_DEPTH = 8,
  localparam int XD = N + 2, localparam int YD = M + 2, localparam int ZD = L + 2,
  localparam int NB = K*K,
  localparam int BKW = $clog2(NB),
  localparam int ZW = $clog2(ZD),
  localparam int BANK_LINES = ((XD + K - 1) / K) * ((YD + K - 1) / K),
  localparam int AW = $clog2(BANK_LINES * ZD + 1),
  localparam int ADEPTH = (BANK_LINES * ZD) * MAX_ICG,
  localparam int ADW = $clog2(ADEPTH),
  localparam int WDEPTH = K * MAX_ICG * MAX_OCG,
  localparam int WDW = $clog2(WDEPTH),
  localparam int AVW = IC_PAR * ACT_W,
  localparam int WBW = OC_PAR * IC_PAR * WGT_W,
  localparam int MW = AVW + WBW,
  localparam int OW = $clog2(N*M*L + 1),
  localparam int GW = (MAX_ICG > 1) ? $clog2(MAX_ICG) : 1,
  localparam int HW = (MAX_OCG > 1) ? $clog2(MAX_OCG) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // load side
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
  // pass control
  input  logic              start,
  input  logic [GW-1:0]     icg,
  input  logic [HW-1:0]     ocg,
  output logic              busy,
  output logic [OW-1:0]     out_count,
  // match stream to the computing core
  output logic              m_valid,
  output logic [AVW-1:0]    m_act,
  output logic [WBW-1:0]    m_wgt,
  output logic              m_first,
  output logic              m_last,
  output logic [OW-1:0]     m_idx,
  // events
  output logic              stall,
  output logic              srf_skip
);
  localparam int FCW = $clog2(FIFO_DEPTH + 1);
  localparam int BW  = $clog2(K + 1);
  localparam int RW  = (K > 1) ? $clog2(K) : 1;

  logic [ZW-1:0]    plane_a, plane_b;
  logic [XD*YD-1:0] mdata_a, mdata_b;
  logic [NB-1:0][FCW-1:0] fifo_free;
  logic desc_room, desc_push, dec_busy, issue_done, mux_busy;
  logic [NB-1:0]          rd_en, rd_en_q, fifo_empty, fifo_pop;
  logic [NB-1:0][AW-1:0]  rd_addr;
  logic [NB-1:0][BKW-1:0] rd_bank;
  logic [RW-1:0]          rd_row;
  logic [NB-1:0][BW-1:0]  desc_cnt;
  logic [OW-1:0]          desc_idx;
  logic [NB-1:0][ADW-1:0] act_addr;
  logic [NB-1:0][WDW-1:0] wgt_addr;
  logic [NB-1:0][AVW-1:0] act_q;
  logic [NB-1:0][WBW-1:0] wgt_q;
  logic [NB-1:0][MW-1:0]  fifo_in, fifo_out;
  logic [GW-1:0] icg_q;
  logic [HW-1:0] ocg_q;
  logic [MW-1:0] m_data;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin icg_q <= '0; ocg_q <= '0; rd_en_q <= '0; end
    else begin
      if (start && !busy) begin icg_q <= icg; ocg_q <= ocg; end
      rd_en_q <= rd_en;
    end

  mask_buffer #(.XD(XD), .YD(YD), .ZD(ZD)) u_mask (
    .clk, .wr_en(mask_wr_en), .wr_plane(mask_wr_plane), .wr_data(mask_wr_data),
    .rd_plane_a(plane_a), .rd_data_a(mdata_a), .rd_plane_b(plane_b), .rd_data_b(mdata_b));

  decoder #(.K(K), .N(N), .M(M), .L(L), .AW(AW), .FCW(FCW)) u_dec (
    .clk, .rst_n, .start(start && !busy),
    .mask_plane_a(plane_a), .mask_data_a(mdata_a), .mask_plane_b(plane_b), .mask_data_b(mdata_b),
    .fifo_free, .desc_room, .rd_en, .rd_addr, .rd_bank, .rd_row,
    .desc_push, .desc_cnt, .desc_idx, .busy(dec_busy), .issue_done, .out_count,
    .stall, .srf_skip);

  always_comb
    for (int c = 0; c < NB; c++) begin
      act_addr[c] = ADW'(int'(rd_addr[c]) * MAX_ICG + int'(icg_q));
      wgt_addr[c] = WDW'((int'(rd_row) * MAX_ICG + int'(icg_q)) * MAX_OCG + int'(ocg_q));
    end

  activation_buffer #(.K(K), .DEPTH(ADEPTH), .WIDTH(AVW)) u_act (
    .clk, .wr_en(act_wr_en), .wr_bank(act_wr_bank), .wr_addr(act_wr_addr), .wr_data(act_wr_data),
    .rd_en, .rd_bank, .rd_addr(act_addr), .rd_data(act_q));

  weight_buffer #(.K(K), .DEPTH(WDEPTH), .WIDTH(WBW)) u_wgt (
    .clk, .wr_en(wgt_wr_en), .wr_bank(wgt_wr_bank), .wr_addr(wgt_wr_addr), .wr_data(wgt_wr_data),
    .rd_en, .rd_addr(wgt_addr), .rd_data(wgt_q));

  always_comb
    for (int c = 0; c < NB; c++) fifo_in[c] = {act_q[c], wgt_q[c]};

  fifo_group #(.K(K), .WIDTH(MW), .DEPTH(FIFO_DEPTH)) u_fifos (
    .clk, .rst_n, .push(rd_en_q), .wr_data(fifo_in), .pop(fifo_pop),
    .rd_data(fifo_out), .empty(fifo_empty), .free(fifo_free));

  match_mux #(.K(K), .WIDTH(MW), .OW(OW)) u_mux (
    .clk, .rst_n, .desc_push, .desc_cnt, .desc_idx, .desc_room,
    .fifo_data(fifo_out), .fifo_empty, .fifo_pop,
    .m_valid, .m_data, .m_first, .m_last, .m_idx, .busy(mux_busy));

  assign {m_act, m_wgt} = m_data;
  assign busy = dec_busy || mux_busy || (rd_en_q != '0) || (fifo_empty != '1);
endmodule
