// match_mux: the multiplexer that sends matches from the FIFO group to the
// computing core, one per cycle, together with its controller.
//
// The decoder pushes one descriptor per active SRF: how many matches each
// column holds (B) and the output index. The controller takes a descriptor,
// then pops the matches column by column (lowest column first, waiting while
// that FIFO is empty), so the matches of a match group leave in column order
// and groups never interleave. Each match goes out registered with `first`
// and `last` flags of its group and the group's output index. Loading a
// descriptor costs one cycle. The column order follows the paper; the
// descriptor queue is this design's choice.
//
// The descriptor queue's fill count is unused (only its free count
// matters); rst_n also disables the assertion, which lint reports as a
// mixed synchronous/asynchronous use.
module match_mux #(
  parameter int K     = esca_pkg::K,
  parameter int WIDTH = esca_pkg::IC_PAR * esca_pkg::ACT_W
                      + esca_pkg::OC_PAR * esca_pkg::IC_PAR * esca_pkg::WGT_W,
  parameter int OW    = 10,
  parameter int DDEPTH = 4,
  localparam int NB = K*K,
  localparam int BW = $clog2(K + 1),
  localparam int DESC_W = NB*BW + OW
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     desc_push,
  input  logic [NB-1:0][BW-1:0]    desc_cnt,
  input  logic [OW-1:0]            desc_idx,
  output logic                     desc_room,
  input  logic [NB-1:0][WIDTH-1:0] fifo_data,
  input  logic [NB-1:0]            fifo_empty,
  output logic [NB-1:0]            fifo_pop,
  output logic                     m_valid,
  output logic [WIDTH-1:0]         m_data,
  output logic                     m_first,
  output logic                     m_last,
  output logic [OW-1:0]            m_idx,
  output logic                     busy
);
  logic [DESC_W-1:0] dq_data;
  logic dq_empty, dq_full, dq_pop;
  logic [$clog2(DDEPTH+1)-1:0] dq_count;

  sync_fifo #(.WIDTH(DESC_W), .DEPTH(DDEPTH)) u_desc (
    .clk, .rst_n, .push(desc_push), .wr_data({desc_cnt, desc_idx}), .pop(dq_pop),
    .rd_data(dq_data), .empty(dq_empty), .full(dq_full), .count(dq_count));

  logic                 have, first_pend;
  logic [NB-1:0][BW-1:0] rem;
  logic [OW-1:0]        idx;
  logic [$clog2(NB)-1:0] sel;
  logic                 any, can, last;
  logic [$clog2(NB*K+1)-1:0] total;

  always_comb begin
    sel = '0; any = 1'b0; total = '0;
    for (int c = NB-1; c >= 0; c--)
      if (rem[c] != '0) begin sel = $clog2(NB)'(c); any = 1'b1; end
    for (int c = 0; c < NB; c++) total += $bits(total)'(rem[c]);
    can  = have && any && !fifo_empty[sel];
    last = (total == 1);
    fifo_pop = '0;
    fifo_pop[sel] = can;
  end

  assign dq_pop    = !have && !dq_empty;
  assign desc_room = !dq_full;
  assign busy      = have || !dq_empty || m_valid;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      have <= 1'b0; first_pend <= 1'b0; rem <= '0; idx <= '0;
      m_valid <= 1'b0; m_first <= 1'b0; m_last <= 1'b0; m_idx <= '0; m_data <= '0;
    end else begin
      m_valid <= can;
      if (dq_pop) begin
        have <= 1'b1; first_pend <= 1'b1;
        {rem, idx} <= dq_data;
      end
      if (can) begin
        rem[sel]   <= rem[sel] - 1'b1;
        m_data     <= fifo_data[sel];
        m_first    <= first_pend;
        m_last     <= last;
        m_idx      <= idx;
        first_pend <= 1'b0;
        if (last) have <= 1'b0;
      end
    end

  a_group_nonempty: assert property (@(posedge clk) disable iff (!rst_n)
    dq_pop |-> (dq_data[DESC_W-1:OW] != '0));
endmodule
