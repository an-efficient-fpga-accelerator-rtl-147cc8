// computing_unit: one CU of the computing array.
//
// Multiplies IC_PAR activations by the IC_PAR weights of one output channel
// and sums the products in a binary adder tree, giving that channel's
// partial sum for one match. Signed operands. Combinational. Structure
// (multipliers feeding pairwise adders) follows the paper's CU figure.
module computing_unit #(
  parameter int IC_PAR = esca_pkg::IC_PAR,
  parameter int ACT_W  = esca_pkg::ACT_W,
  parameter int WGT_W  = esca_pkg::WGT_W,
  localparam int PW = ACT_W + WGT_W,
  localparam int SW = PW + $clog2(IC_PAR)
) (
  input  logic signed [IC_PAR-1:0][ACT_W-1:0] act,
  input  logic signed [IC_PAR-1:0][WGT_W-1:0] wgt,
  output logic signed [SW-1:0]                psum
);
  localparam int LEVELS = $clog2(IC_PAR);
  localparam int P2 = 1 << LEVELS;
  logic signed [SW-1:0] tree [LEVELS+1][P2];

  always_comb begin
    for (int l = 0; l <= LEVELS; l++)
      for (int i = 0; i < P2; i++) tree[l][i] = '0;
    for (int i = 0; i < IC_PAR; i++)
      tree[0][i] = SW'($signed(act[i]) * $signed(wgt[i]));
    for (int l = 1; l <= LEVELS; l++)
      for (int i = 0; i < (P2 >> l); i++)
        tree[l][i] = tree[l-1][2*i] + tree[l-1][2*i+1];
    psum = tree[LEVELS][0];
  end
endmodule
