// tb_mat_engine: S lanes with a shared input and own weights, with and
// without ReLU on the weights, accumulated over 2 cycles; compared with
// reference dot products.
`timescale 1ns/1ps
module tb_mat_engine;
  import evit_pkg::*;
  localparam int S = 8, T = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en = 0, clr = 0, relu_w = 0;
  data_t [T-1:0] x = '0;
  data_t [S-1:0][T-1:0] w = '0;
  acc_t [S-1:0] acc;
  longint e [S];
  mat_engine #(.S(S), .T(T)) dut (.*);
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 10; it++) begin
      for (int s = 0; s < S; s++) e[s] = 0;
      for (int c = 0; c < 2; c++) begin
        @(negedge clk); en = 1; clr = (c == 0); relu_w = it[0];
        for (int t = 0; t < T; t++) x[t] = data_t'($urandom);
        for (int s = 0; s < S; s++) for (int t = 0; t < T; t++) begin
          w[s][t] = data_t'($urandom);
          e[s] += longint'(x[t]) * ((relu_w && w[s][t] < 0) ? 0 : longint'(w[s][t]));
        end
      end
      @(negedge clk); en = 0;
      for (int s = 0; s < S; s++) begin
        checks++; if (acc[s] != acc_t'(e[s])) begin failures++; $display("s%0d got %0d exp %0d", s, acc[s], e[s]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
