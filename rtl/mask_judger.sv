// mask_judger: the "read masks" and "judge state" steps of the matching
// operation.
//
// For a sparse receptive field (SRF) centred on voxel (cx, cy, cz), the
// K x K x K masks around the centre are gathered as K*K columns of K bits.
// A column c = dx*K + dy is the line of voxels at (cx+dx-K/2, cy+dy-K/2);
// its bit r is the voxel at depth cz+r-K/2. The decoder reads one mask plane
// per cycle for K cycles (row = 0..K-1) and the judger picks the K*K bits of
// the SRF out of each plane, which gives the K-cycle step length of the
// paper's pipeline figure. win_next is the window including the plane
// presented in the current cycle; active is the centre mask bit of
// win_next: an SRF is active when its centre activation is nonzero, as the
// paper states.
module mask_judger #(
  parameter int K  = esca_pkg::K,
  parameter int XD = esca_pkg::TILE_N + 2,
  parameter int YD = esca_pkg::TILE_M + 2,
  localparam int COLS = K*K,
  localparam int XW = $clog2(XD),
  localparam int YW = $clog2(YD),
  localparam int RW = (K > 1) ? $clog2(K) : 1
) (
  input  logic                      clk,
  input  logic                      sample,   // capture this plane as row `row`
  input  logic [RW-1:0]             row,
  input  logic [XW-1:0]             cx,
  input  logic [YW-1:0]             cy,
  input  logic [XD*YD-1:0]          plane,
  output logic [COLS-1:0][K-1:0]    win_next,
  output logic                      active
);
  logic [COLS-1:0][K-1:0] win_q;
  logic [COLS-1:0]        cur;   // the K*K bits of the SRF in this plane

  always_comb
    for (int dx = 0; dx < K; dx++)
      for (int dy = 0; dy < K; dy++)
        cur[dx*K+dy] = plane[(int'(cx) + dx - K/2) * YD + (int'(cy) + dy - K/2)];

  always_comb begin
    win_next = win_q;
    if (sample)
      for (int c = 0; c < COLS; c++) win_next[c][row] = cur[c];
  end

  always_ff @(posedge clk)
    win_q <= win_next;

  assign active = win_next[COLS/2][K/2];
endmodule
