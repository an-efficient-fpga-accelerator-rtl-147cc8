// computing_array: OC_PAR computing units side by side.
//
// The IC_PAR activations of a match are broadcast to every CU; CU m gets
// the weights W[n][m] of output channel m (the weight block holds
// W[n][m] at bits [(m*IC_PAR+n)*WGT_W +: WGT_W]). The OC_PAR partial sums
// are registered, together with the match's valid, first, last and index
// tags, so one match enters and one result leaves every cycle with one
// cycle of latency. Broadcast and per-output-channel CUs follow the paper;
// the single register stage is this design's choice.
module computing_array #(
  parameter int IC_PAR = esca_pkg::IC_PAR,
  parameter int OC_PAR = esca_pkg::OC_PAR,
  parameter int ACT_W  = esca_pkg::ACT_W,
  parameter int WGT_W  = esca_pkg::WGT_W,
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
  output logic [OC_PAR-1:0][SW-1:0]          out_psum,
  output logic                               out_first,
  output logic                               out_last,
  output logic [OW-1:0]                      out_idx
);
  logic [OC_PAR-1:0][SW-1:0] psum;

  for (genvar m = 0; m < OC_PAR; m++) begin : g_cu
    computing_unit #(.IC_PAR(IC_PAR), .ACT_W(ACT_W), .WGT_W(WGT_W)) u_cu (
      .act(in_act), .wgt(in_wgt[m*IC_PAR*WGT_W +: IC_PAR*WGT_W]), .psum(psum[m]));
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      out_valid <= 1'b0; out_first <= 1'b0; out_last <= 1'b0; out_idx <= '0; out_psum <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_psum <= psum; out_first <= in_first; out_last <= in_last; out_idx <= in_idx;
      end
    end
endmodule
