// tb_rearrange: captures a DW tile (expects 8 row writes from wbase, busy for
// 8 cycles), a PW row (one write one cycle later), and 8 KV rows with Ksum
// (expects the Ksum vector, then the 8 tile columns); checks data, addresses,
// tags and the write count.
`timescale 1ns/1ps
module tb_rearrange;
  import evit_pkg::*;
  localparam int M = 8, T = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic cap = 0, trig = 0, trig_ks = 0;
  cap_e cap_mode = CAP_DW;
  logic [2:0] cap_row = '0;
  logic [X_AW-1:0] wbase = '0;
  logic [3:0] tag = '0;
  data_t [M-1:0][T-1:0] dw_vals = '0;
  data_t [M-1:0] row_vals = '0;
  data_t ks_val = '0;
  logic wr_valid, busy; logic [X_AW-1:0] wr_addr; data_t [T-1:0] wr_data; logic [3:0] wr_tag;
  rearrange #(.M(M), .T(T)) dut (.*);

  data_t [T-1:0] got [64];
  int gaddr [64];
  int nw = 0;
  always @(posedge clk) if (rst_n && wr_valid) begin
    got[nw % 64] = wr_data; gaddr[nw % 64] = int'(wr_addr);
    checks++; if (wr_tag != tag) begin failures++; $display("tag"); end
    nw++;
  end
  task automatic chk(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  data_t [T-1:0][T-1:0] tile;
  data_t [T-1:0] ks;
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    // DW tile
    foreach (dw_vals[j, n]) dw_vals[j][n] = data_t'($urandom);
    @(negedge clk); cap = 1; cap_mode = CAP_DW; trig = 1; wbase = 100; tag = 3;
    @(negedge clk); cap = 0; trig = 0;
    chk(busy, "busy after DW capture");
    repeat (10) @(negedge clk);
    chk(nw == 8, "8 DW writes");
    for (int j = 0; j < 8; j++) begin chk(got[j] == dw_vals[j], "DW row"); chk(gaddr[j] == 100 + j, "DW addr"); end
    // PW row
    nw = 0;
    foreach (row_vals[j]) row_vals[j] = data_t'($urandom);
    @(negedge clk); cap = 1; cap_mode = CAP_ROW; trig = 1; wbase = 7; tag = 5;
    @(negedge clk); cap = 0; trig = 0;
    chk(wr_valid && wr_addr == 7 && wr_data == row_vals, "ROW write next cycle");
    repeat (2) @(negedge clk);
    chk(nw == 1, "1 ROW write");
    // KV rows
    nw = 0;
    for (int r = 0; r < T; r++) begin
      @(negedge clk); cap = 1; cap_mode = CAP_KV; cap_row = 3'(r); trig = (r == T-1); trig_ks = 1; wbase = 200; tag = 9;
      foreach (row_vals[j]) row_vals[j] = data_t'($urandom);
      ks_val = data_t'($urandom);
      tile[r] = row_vals; ks[r] = ks_val;
    end
    @(negedge clk); cap = 0; trig = 0;
    repeat (12) @(negedge clk);
    chk(nw == 9, "9 KV writes");
    chk(got[0] == ks && gaddr[0] == 200, "Ksum vector first");
    for (int j = 0; j < M; j++) begin
      data_t [T-1:0] col;
      for (int a = 0; a < T; a++) col[a] = tile[a][j];
      chk(got[1+j] == col, $sformatf("Z column %0d", j)); chk(gaddr[1+j] == 201 + j, "KV addr");
    end
    chk(!busy, "idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
