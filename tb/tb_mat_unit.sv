// tb_mat_unit: dot products of random int8 vectors accumulated over 1..3
// cycles, compared with a reference sum.
`timescale 1ns/1ps
module tb_mat_unit;
  import evit_pkg::*;
  localparam int T = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en = 0, clr = 0;
  data_t [T-1:0] x = '0, w = '0;
  acc_t acc;
  longint e;
  mat_unit #(.T(T)) dut (.*);
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 20; it++) begin
      e = 0;
      for (int c = 0; c <= it % 3; c++) begin
        @(negedge clk); en = 1; clr = (c == 0);
        for (int t = 0; t < T; t++) begin x[t] = data_t'($urandom); w[t] = data_t'($urandom); e += longint'(x[t]) * longint'(w[t]); end
      end
      @(negedge clk); en = 0;
      checks++; if (acc != acc_t'(e)) begin failures++; $display("got %0d exp %0d", acc, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
