// main_controller: runs the SDMU and the computing core in the right order
// for one tile.
//
// On `start` it first applies the zero removing rule: a tile whose mask
// holds no nonzero activation is skipped at once (done and skipped pulse
// together). Otherwise it runs one matching pass per channel-group pair,
// output groups outer and input groups inner, so that the output buffer
// can add the input groups of a sum: each pass starts the SDMU and waits
// until the SDMU and the computing core are both empty. The SDMU and the
// core work as a pipeline within a pass. done pulses one cycle after the
// last pass has drained. The paper gives the controller's role only; the
// pass order and handshake are this design's choices.
module main_controller #(
  parameter int MAX_ICG = esca_pkg::MAX_ICG,
  parameter int MAX_OCG = esca_pkg::MAX_OCG,
  localparam int GW = (MAX_ICG > 1) ? $clog2(MAX_ICG) : 1,
  localparam int HW = (MAX_OCG > 1) ? $clog2(MAX_OCG) : 1,
  localparam int GCW = $clog2(MAX_ICG + 1),
  localparam int HCW = $clog2(MAX_OCG + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [GCW-1:0] cfg_icg,     // number of input-channel groups, 1..MAX_ICG
  input  logic [HCW-1:0] cfg_ocg,     // number of output-channel groups, 1..MAX_OCG
  input  logic           tile_active,
  input  logic           sdmu_busy,
  input  logic           cc_busy,
  output logic           sdmu_start,
  output logic [GW-1:0]  icg,
  output logic [HW-1:0]  ocg,
  output logic           busy,
  output logic           done,
  output logic           skipped
);
  typedef enum logic [1:0] {IDLE, LAUNCH, WAIT} state_t;
  state_t state;

  assign sdmu_start = (state == LAUNCH);
  assign busy       = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state <= IDLE; icg <= '0; ocg <= '0; done <= 1'b0; skipped <= 1'b0;
    end else begin
      done <= 1'b0; skipped <= 1'b0;
      case (state)
        IDLE: if (start) begin
          icg <= '0; ocg <= '0;
          if (tile_active) state <= LAUNCH;
          else begin done <= 1'b1; skipped <= 1'b1; end
        end
        LAUNCH: state <= WAIT;
        WAIT: if (!sdmu_busy && !cc_busy) begin
          if (int'(icg) + 1 < int'(cfg_icg)) begin
            icg <= icg + 1'b1; state <= LAUNCH;
          end else if (int'(ocg) + 1 < int'(cfg_ocg)) begin
            icg <= '0; ocg <= ocg + 1'b1; state <= LAUNCH;
          end else begin
            state <= IDLE; done <= 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end
endmodule
