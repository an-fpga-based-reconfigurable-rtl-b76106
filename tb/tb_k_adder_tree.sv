// tb_k_adder_tree: random vectors accumulated over 1..4 cycles; the row sum is
// compared with a sum computed here.
`timescale 1ns/1ps
module tb_k_adder_tree;
  import evit_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en = 0, clr = 0;
  data_t [N-1:0] k = '0;
  acc_t sum;
  longint e;
  k_adder_tree #(.N(N)) dut (.*);
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 20; it++) begin
      e = 0;
      for (int c = 0; c <= it % 4; c++) begin
        @(negedge clk); en = 1; clr = (c == 0);
        for (int n = 0; n < N; n++) begin k[n] = data_t'($urandom_range(0, 127)); e += k[n]; end
      end
      @(negedge clk); en = 0;
      checks++; if (sum != acc_t'(e)) begin failures++; $display("got %0d exp %0d", sum, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
