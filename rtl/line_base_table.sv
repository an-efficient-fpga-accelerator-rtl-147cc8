// line_base_table: start address of every mask line in its activation bank.
//
// The nonzero activations of a tile are stored line by line: a line is the
// column of voxels (x, y, 0..ZD-1) and it lives in bank
// (x mod K)*K + (y mod K); inside a bank the lines follow in raster order
// (x outer, y inner) and each line occupies as many entries as it has ones.
// The start address of a line is therefore the sum of the popcounts of the
// earlier lines of its bank. After `start` the table reads the ZD mask planes
// (one per cycle) and counts the ones of all lines in parallel, then walks
// the XD*YD lines one per cycle, assigning starts from a running count per
// bank. `done` pulses when the table is valid: ZD + XD*YD + 1 cycles after
// start. The paper does not say how the column addresses are found; this
// pre-pass is this design's choice.
module line_base_table #(
  parameter int K  = esca_pkg::K,
  parameter int XD = esca_pkg::TILE_N + 2,
  parameter int YD = esca_pkg::TILE_M + 2,
  parameter int ZD = esca_pkg::TILE_L + 2,
  parameter int AW = 8,
  localparam int NL = XD*YD,
  localparam int ZW = $clog2(ZD),
  localparam int LW = $clog2(NL),
  localparam int CW = $clog2(ZD + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  output logic [ZW-1:0]       rd_plane,
  input  logic [NL-1:0]       plane,
  output logic [NL-1:0][AW-1:0] base,
  output logic                done
);
  typedef enum logic [1:0] {IDLE, COUNT, WALK} state_t;
  state_t state;
  logic [ZW-1:0] z;
  logic [LW-1:0] l;
  logic [NL-1:0][CW-1:0]   cnt;
  logic [K*K-1:0][AW-1:0]  bank_next;

  assign rd_plane = z;

  function automatic int bank_of(input int line);
    return esca_pkg::line_bank(line / YD, line % YD, K);
  endfunction

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state <= IDLE; z <= '0; l <= '0; done <= 1'b0;
      cnt <= '0; bank_next <= '0; base <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        IDLE: if (start) begin
          state <= COUNT; z <= '0; cnt <= '0; bank_next <= '0;
        end
        COUNT: begin
          for (int i = 0; i < NL; i++) cnt[i] <= cnt[i] + CW'(plane[i]);
          if (int'(z) == ZD-1) begin state <= WALK; l <= '0; end
          else z <= z + 1'b1;
        end
        WALK: begin
          base[l] <= bank_next[bank_of(int'(l))];
          bank_next[bank_of(int'(l))] <= bank_next[bank_of(int'(l))] + AW'(cnt[l]);
          if (int'(l) == NL-1) begin state <= IDLE; done <= 1'b1; end
          else l <= l + 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
endmodule
