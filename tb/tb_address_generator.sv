// tb_address_generator: checks the address fragments (A, A-B) and the
// per-row fetch addresses of the worked example of the matching steps
// (fragments (1,0)(2,0)(2,0) and (2,1)(2,0)(3,1); SRF 1 fetches A1, B0, B1,
// C1, C2), and random cases against a reference model.
module tb_address_generator;
  `include "tb_util.svh"
  localparam int K = 3, COLS = 9, AW = 8, BW = 2;
  logic active;
  logic [1:0] row;
  logic [COLS-1:0][K-1:0]  win;
  logic [COLS-1:0][AW-1:0] idx_a, frag_lo, rd_addr;
  logic [COLS-1:0][BW-1:0] idx_b;
  logic [COLS-1:0]         rd_en;
  address_generator #(.K(K), .AW(AW)) dut (.*);

  initial begin
    // SRF 0 of the example: windows A=100, B=011, C=101 (row 0 first)
    active = 1; win = '0; idx_a = '0; idx_b = '0;
    win[0] = 3'b001; win[1] = 3'b110; win[2] = 3'b101;
    idx_a[0] = 1; idx_b[0] = 1; idx_a[1] = 2; idx_b[1] = 2; idx_a[2] = 2; idx_b[2] = 2;
    row = 0; #1;
    check(frag_lo[0] == 0 && frag_lo[1] == 0 && frag_lo[2] == 0, "SRF 0 fragments");
    check(rd_en[2:0] == 3'b101 && rd_addr[0] == 0 && rd_addr[2] == 0, "SRF 0 row 0: A0, C0");
    row = 1; #1; check(rd_en[2:0] == 3'b010 && rd_addr[1] == 0, "SRF 0 row 1: B0");
    row = 2; #1; check(rd_en[2:0] == 3'b110 && rd_addr[1] == 1 && rd_addr[2] == 1, "SRF 0 row 2: B1, C1");
    // SRF 1: windows A=001, B=110, C=011
    win[0] = 3'b100; win[1] = 3'b011; win[2] = 3'b110;
    idx_a[0] = 2; idx_b[0] = 1; idx_a[1] = 2; idx_b[1] = 2; idx_a[2] = 3; idx_b[2] = 2;
    row = 0; #1;
    check(frag_lo[0] == 1 && frag_lo[1] == 0 && frag_lo[2] == 1, "SRF 1 fragments");
    check(rd_en[2:0] == 3'b010 && rd_addr[1] == 0, "SRF 1 row 0: B0");
    row = 1; #1; check(rd_en[2:0] == 3'b110 && rd_addr[1] == 1 && rd_addr[2] == 1, "SRF 1 row 1: B1, C1");
    row = 2; #1; check(rd_en[2:0] == 3'b101 && rd_addr[0] == 1 && rd_addr[2] == 2, "SRF 1 row 2: A1, C2");
    active = 0; #1; check(rd_en == '0, "non-active SRF fetches nothing");
    repeat (300) begin
      active = 1'($urandom_range(1)); row = 2'($urandom_range(2));
      for (int c = 0; c < COLS; c++) begin
        automatic int b = 0;
        win[c] = 3'($urandom_range(7));
        for (int r = 0; r < K; r++) b += win[c][r];
        idx_b[c] = BW'(b); idx_a[c] = AW'($urandom_range(200) + b);
      end
      #1;
      for (int c = 0; c < COLS; c++) begin
        automatic int below = 0;
        for (int r = 0; r < int'(row); r++) below += win[c][r];
        check(rd_en[c] == (active && win[c][row]), "random rd_en");
        if (rd_en[c]) check(int'(rd_addr[c]) == int'(idx_a[c]) - int'(idx_b[c]) + below, "random rd_addr");
      end
    end
    finish_tb();
  end
endmodule
