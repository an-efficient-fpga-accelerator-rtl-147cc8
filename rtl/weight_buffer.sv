// weight_buffer: the weights of the layer.
//
// K*K banks, one per kernel column (dx, dy), so the K*K lanes of the fetch
// step each read their own bank in the same cycle. An entry is one
// OC_PAR x IC_PAR weight block (bits [(oc*IC_PAR+ic)*WGT_W +: WGT_W]) for
// kernel depth dz, input-channel group g and output-channel group h, at
// address (dz*MAX_ICG + g)*MAX_OCG + h. Read data appear one cycle after
// rd_en. The paper fetches the weight of a match by the same state index
// as its activation; the bank layout is this design's choice.
module weight_buffer #(
  parameter int K       = esca_pkg::K,
  parameter int DEPTH   = esca_pkg::K * esca_pkg::MAX_ICG * esca_pkg::MAX_OCG,
  parameter int WIDTH   = esca_pkg::OC_PAR * esca_pkg::IC_PAR * esca_pkg::WGT_W,
  localparam int NB = K*K,
  localparam int BKW = $clog2(NB),
  localparam int DW = $clog2(DEPTH)
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [BKW-1:0]           wr_bank,
  input  logic [DW-1:0]            wr_addr,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic [NB-1:0]            rd_en,
  input  logic [NB-1:0][DW-1:0]    rd_addr,
  output logic [NB-1:0][WIDTH-1:0] rd_data
);
  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic [WIDTH-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en && int'(wr_bank) == b) mem[wr_addr] <= wr_data;
      if (rd_en[b]) rd_data[b] <= mem[rd_addr[b]];
    end
  end
endmodule
