// output_buffer: the output activations of a tile, before they go off chip.
//
// One entry per active SRF and output-channel group: address
// idx*MAX_OCG + h, OC_PAR sums of ACC_W bits. The accumulator writes the sum
// of a match group; with `accumulate` set (every input-channel group after
// the first) the entry is read, added to and written back in the same
// cycle, which completes the input-channel loop across passes. The read
// port for the off-chip side returns data one cycle after rd_en. The paper
// names the buffer and its role; accumulation across channel groups and the
// 32-bit width are this design's choices.
module output_buffer #(
  parameter int DEPTH  = esca_pkg::TILE_N * esca_pkg::TILE_M * esca_pkg::TILE_L * esca_pkg::MAX_OCG,
  parameter int OC_PAR = esca_pkg::OC_PAR,
  parameter int ACC_W  = esca_pkg::ACC_W,
  localparam int DW = $clog2(DEPTH)
) (
  input  logic                               clk,
  input  logic                               wr_en,
  input  logic                               accumulate,
  input  logic [DW-1:0]                      wr_addr,
  input  logic [OC_PAR-1:0][ACC_W-1:0]       wr_data,
  input  logic                               rd_en,
  input  logic [DW-1:0]                      rd_addr,
  output logic [OC_PAR-1:0][ACC_W-1:0]       rd_data
);
  logic [OC_PAR-1:0][ACC_W-1:0] mem [DEPTH];
  logic [OC_PAR-1:0][ACC_W-1:0] old, sum;

  assign old = mem[wr_addr];
  always_comb
    for (int o = 0; o < OC_PAR; o++)
      sum[o] = accumulate ? old[o] + wr_data[o] : wr_data[o];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= sum;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
