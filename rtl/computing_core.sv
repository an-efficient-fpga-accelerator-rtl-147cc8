// computing_core: the computing array followed by the accumulator.
//
// Takes one match per cycle (IC_PAR activations and an OC_PAR x IC_PAR
// weight block) and produces, for each match group, OC_PAR output sums with
// the group's output index, two cycles after the group's last match. `busy`
// is high while a match or result is inside. As in the paper, the core
// sees only dense point-wise multiply-accumulates.
module computing_core #(
  parameter int IC_PAR = esca_pkg::IC_PAR,
  parameter int OC_PAR = esca_pkg::OC_PAR,
  parameter int ACT_W  = esca_pkg::ACT_W,
  parameter int WGT_W  = esca_pkg::WGT_W,
  parameter int ACC_W  = esca_pkg::ACC_W,
  parameter int OW     = 10,
  localparam int SW = ACT_W + WGT_W + $clog2(IC_PAR)
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               in_valid,
  input  logic [IC_PAR*ACT_W-1:0]            in_act,
  input  logic [OC_PAR*IC_PAR*WGT_W-1:0]     in_wgt,
  input  logic                               in_first,
  input  logic                               in_last,
  input  logic [OW-1:0]                      in_idx,
  output logic                               out_valid,
  output logic [OC_PAR-1:0][ACC_W-1:0]       out_data,
  output logic [OW-1:0]                      out_idx,
  output logic                               busy
);
  logic                      a_valid, a_first, a_last;
  logic [OC_PAR-1:0][SW-1:0] a_psum;
  logic [OW-1:0]             a_idx;

  computing_array #(.IC_PAR(IC_PAR), .OC_PAR(OC_PAR), .ACT_W(ACT_W), .WGT_W(WGT_W), .OW(OW)) u_array (
    .clk, .rst_n, .in_valid, .in_act, .in_wgt, .in_first, .in_last, .in_idx,
    .out_valid(a_valid), .out_psum(a_psum), .out_first(a_first), .out_last(a_last), .out_idx(a_idx));

  accumulator #(.OC_PAR(OC_PAR), .SW(SW), .ACC_W(ACC_W), .OW(OW)) u_acc (
    .clk, .rst_n, .in_valid(a_valid), .in_psum(a_psum), .in_first(a_first), .in_last(a_last),
    .in_idx(a_idx), .out_valid, .out_data, .out_idx);

  assign busy = a_valid || out_valid;
endmodule
