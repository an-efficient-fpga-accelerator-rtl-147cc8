// accumulator: sums the partial sums of all matches of a match group.
//
// For the first match of a group the OC_PAR registers load the partial
// sums, for later ones they add them (sign-extended to ACC_W). With the
// last match the group's sums leave registered on out_valid/out_data with
// the group's output index, one cycle after the last partial sum. The paper
// places the accumulator after the computing array; the first/last tagging
// is this design's choice.
module accumulator #(
  parameter int OC_PAR = esca_pkg::OC_PAR,
  parameter int SW     = esca_pkg::ACT_W + esca_pkg::WGT_W + $clog2(esca_pkg::IC_PAR),
  parameter int ACC_W  = esca_pkg::ACC_W,
  parameter int OW     = 10
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [OC_PAR-1:0][SW-1:0]     in_psum,
  input  logic                          in_first,
  input  logic                          in_last,
  input  logic [OW-1:0]                 in_idx,
  output logic                          out_valid,
  output logic [OC_PAR-1:0][ACC_W-1:0]  out_data,
  output logic [OW-1:0]                 out_idx
);
  logic [OC_PAR-1:0][ACC_W-1:0] acc, nxt;

  always_comb
    for (int o = 0; o < OC_PAR; o++) begin
      logic signed [ACC_W-1:0] ext;
      ext    = ACC_W'($signed(in_psum[o]));
      nxt[o] = in_first ? ext : acc[o] + ext;
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      acc <= '0; out_valid <= 1'b0; out_data <= '0; out_idx <= '0;
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid) begin
        acc <= nxt;
        if (in_last) begin out_data <= nxt; out_idx <= in_idx; end
      end
    end
endmodule
