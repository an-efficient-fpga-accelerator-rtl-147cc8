// activation_buffer: the nonzero activations of a tile (the "valid data").
//
// K*K banks, one read port each. A mask line (x, y) is stored in bank
// (x mod K)*K + (y mod K), so the K*K columns of any SRF fall in K*K
// different banks and are read in the same cycle without conflict. An entry
// holds IC_PAR activations (one input-channel group); the entry of
// activation number i of a bank for channel group g is at address
// i*MAX_ICG + g. The fetch side has one request per SRF column (rd_en,
// rd_bank, rd_addr); the requests must name different banks. A crossbar
// routes each request to its bank and the data back; data appear one cycle
// after the request (block-RAM style). The write port loads one entry per
// cycle. Only compressed nonzero activations are stored, as in the paper;
// the banking is this design's choice.
module activation_buffer #(
  parameter int K       = esca_pkg::K,
  parameter int DEPTH   = 160 * esca_pkg::MAX_ICG,
  parameter int WIDTH   = esca_pkg::IC_PAR * esca_pkg::ACT_W,
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
  input  logic [NB-1:0][BKW-1:0]   rd_bank,
  input  logic [NB-1:0][DW-1:0]    rd_addr,
  output logic [NB-1:0][WIDTH-1:0] rd_data
);
  logic [NB-1:0][DW-1:0]    bank_addr;
  logic [NB-1:0]            bank_en;
  logic [NB-1:0][WIDTH-1:0] bank_q;
  logic [NB-1:0][BKW-1:0]   route_q;

  always_comb begin
    bank_addr = '0;
    bank_en   = '0;
    for (int c = 0; c < NB; c++)
      if (rd_en[c]) begin
        bank_en[rd_bank[c]]   = 1'b1;
        bank_addr[rd_bank[c]] = rd_addr[c];
      end
  end

  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic [WIDTH-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en && int'(wr_bank) == b) mem[wr_addr] <= wr_data;
      if (bank_en[b]) bank_q[b] <= mem[bank_addr[b]];
    end
  end

  always_ff @(posedge clk)
    route_q <= rd_bank;

  always_comb
    for (int c = 0; c < NB; c++) rd_data[c] = bank_q[route_q[c]];
endmodule
