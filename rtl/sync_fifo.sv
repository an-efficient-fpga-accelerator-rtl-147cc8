// sync_fifo: single-clock first-in first-out queue.
//
// Used for the per-column match FIFOs of the FIFO group and for the match
// group descriptors. Circular array with read and write pointers and an
// occupancy count; push and pop may occur in the same cycle. rd_data shows
// the head entry combinationally (first-word fall-through). Pushing when
// full or popping when empty is a protocol error caught by assertions.
//
// rst_n also disables the assertions, which lint reports as a mixed
// synchronous/asynchronous use; this is intended.
module sync_fifo #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 8,
  localparam int PW = $clog2(DEPTH),
  localparam int CW = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             pop,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic [CW-1:0]    count
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0] wp, rp;

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (int'(p) == DEPTH-1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk)
    if (push) mem[wp] <= wr_data;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= inc(wp);
      if (pop)  rp <= inc(rp);
      count <= count + CW'(push) - CW'(pop);
    end

  assign rd_data = mem[rp];
  assign empty   = (count == '0);
  assign full    = (int'(count) == DEPTH);

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
