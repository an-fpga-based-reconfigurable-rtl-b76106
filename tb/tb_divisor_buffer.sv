// tb_divisor_buffer: writes S divisors, checks they are held while we = 0
// and replaced on the next write.
`timescale 1ns/1ps
module tb_divisor_buffer;
  import evit_pkg::*;
  localparam int S = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 0;
  acc_t [S-1:0] wdata = '0, rdata, keep;
  divisor_buffer #(.S(S)) dut (.*);
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 10; it++) begin
      @(negedge clk); we = 1; foreach (wdata[s]) wdata[s] = acc_t'($urandom); keep = wdata;
      @(negedge clk); we = 0; foreach (wdata[s]) wdata[s] = acc_t'($urandom);
      repeat (3) @(negedge clk);
      checks++; if (rdata != keep) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
