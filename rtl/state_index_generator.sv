// state_index_generator: the "generate state index" step, one lane per
// column of the SRF (K*K lanes).
//
// Each lane keeps an accumulator (Acc). For the first SRF of a line it is
// loaded with the line's start address in its activation bank plus the
// number of ones in the K-bit mask window; for each following SRF (the
// window slides by one voxel along the column) the newly entered leading
// mask bit is added. The state index is (A, B): A is the accumulated count,
// i.e. one past the bank address of the column's last nonzero activation in
// the window; B is the number of ones in the window when the SRF is active
// and 0 otherwise. This follows the paper's description and its figure of
// the adder and Acc per lane; the line start address (base) is this design's
// way of storing many columns in one bank. Outputs are registered and
// update on `step`.
module state_index_generator #(
  parameter int K  = esca_pkg::K,
  parameter int AW = 8,
  localparam int COLS = K*K,
  localparam int BW = $clog2(K + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     step,
  input  logic                     new_line,
  input  logic                     active,
  input  logic [COLS-1:0][K-1:0]   win,
  input  logic [COLS-1:0][AW-1:0]  base,
  output logic [COLS-1:0][AW-1:0]  idx_a,
  output logic [COLS-1:0][BW-1:0]  idx_b
);
  logic [COLS-1:0][AW-1:0] acc, nxt;
  logic [COLS-1:0][BW-1:0] cnt;

  function automatic logic [BW-1:0] ones(input logic [K-1:0] v);
    logic [BW-1:0] s = '0;
    for (int i = 0; i < K; i++) s += BW'(v[i]);
    return s;
  endfunction

  // Mask window adder and accumulator update of each lane.
  always_comb
    for (int c = 0; c < COLS; c++) begin
      cnt[c] = ones(win[c]);
      nxt[c] = new_line ? base[c] + AW'(cnt[c]) : acc[c] + AW'(win[c][K-1]);
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      acc <= '0; idx_a <= '0; idx_b <= '0;
    end else if (step) begin
      acc   <= nxt;
      idx_a <= nxt;
      for (int c = 0; c < COLS; c++) idx_b[c] <= active ? cnt[c] : '0;
    end
endmodule
