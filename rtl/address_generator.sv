// address_generator: the "fetch activations" addressing, one lane per
// column.
//
// From the state index (A, B) each lane forms the address fragment
// (A, A-B): the activations of the column inside the SRF occupy bank
// addresses A-B .. A-1. The fetch takes K cycles; in cycle `row` the lane
// reads the activation at depth `row` of the window if its mask bit is set,
// at address (A-B) + (ones below `row` in the window). The weight of that
// match is the kernel tap (column, row). Combinational. The fragment follows
// the paper; reading one row per cycle is this design's choice.
module address_generator #(
  parameter int K  = esca_pkg::K,
  parameter int AW = 8,
  localparam int COLS = K*K,
  localparam int BW = $clog2(K + 1),
  localparam int RW = (K > 1) ? $clog2(K) : 1
) (
  input  logic                     active,
  input  logic [RW-1:0]            row,
  input  logic [COLS-1:0][K-1:0]   win,
  input  logic [COLS-1:0][AW-1:0]  idx_a,
  input  logic [COLS-1:0][BW-1:0]  idx_b,
  output logic [COLS-1:0][AW-1:0]  frag_lo,   // A - B
  output logic [COLS-1:0]          rd_en,
  output logic [COLS-1:0][AW-1:0]  rd_addr
);
  always_comb
    for (int c = 0; c < COLS; c++) begin
      logic [AW-1:0] below;
      below = '0;
      for (int r = 0; r < K; r++)
        if (r < int'(row)) below += AW'(win[c][r]);
      frag_lo[c] = idx_a[c] - AW'(idx_b[c]);
      rd_en[c]   = active && win[c][row];
      rd_addr[c] = frag_lo[c] + below;
    end
endmodule
