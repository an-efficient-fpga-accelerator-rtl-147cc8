// fifo_group: K*K identical FIFOs, one per SRF column.
//
// FIFO c holds the matches fetched from column c, each the concatenation of
// an activation entry and its weight block, in fetch order. The free count
// of every FIFO goes to the decoder, which stalls the fetch step when a
// FIFO could overflow. K*K FIFOs, one per column, follow the paper; the
// depth is this design's choice (it must be at least K+1).
//
// The FIFOs' full flags stay unconnected (the free counts carry more);
// rst_n also reaches the FIFOs' assertions, which lint reports as a
// mixed synchronous/asynchronous use.
module fifo_group #(
  parameter int K     = esca_pkg::K,
  parameter int WIDTH = esca_pkg::IC_PAR * esca_pkg::ACT_W
                      + esca_pkg::OC_PAR * esca_pkg::IC_PAR * esca_pkg::WGT_W,
  parameter int DEPTH = 8,
  localparam int NB = K*K,
  localparam int CW = $clog2(DEPTH + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [NB-1:0]            push,
  input  logic [NB-1:0][WIDTH-1:0] wr_data,
  input  logic [NB-1:0]            pop,
  output logic [NB-1:0][WIDTH-1:0] rd_data,
  output logic [NB-1:0]            empty,
  output logic [NB-1:0][CW-1:0]    free
);
  for (genvar c = 0; c < NB; c++) begin : g_fifo
    logic [CW-1:0] count;
    logic          full;
    sync_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n, .push(push[c]), .wr_data(wr_data[c]), .pop(pop[c]),
      .rd_data(rd_data[c]), .empty(empty[c]), .full, .count);
    assign free[c] = CW'(DEPTH) - count;
  end
endmodule
