// tb_aux_buffer: writes random vectors through both write ports (port 0
// winning a same-cycle conflict) and reads them back on all three read ports
// with one cycle latency, against a shadow copy.
`timescale 1ns/1ps
module tb_aux_buffer;
  import evit_pkg::*;
  localparam int T = 8, DEPTH = 512;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we0 = 0, we1 = 0;
  logic [8:0] waddr0 = '0, waddr1 = '0, raddr0 = '0, raddr1 = '0, raddr2 = '0;
  data_t [T-1:0] wdata0 = '0, wdata1 = '0, rdata0, rdata1, rdata2;
  data_t [T-1:0] shadow [DEPTH];
  aux_buffer #(.T(T), .DEPTH(DEPTH)) dut (.*);
  initial begin
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      we0 = (i % 3 != 1); we1 = (i % 3 != 0);
      waddr0 = 9'(i); waddr1 = 9'(i);
      foreach (wdata0[t]) begin wdata0[t] = data_t'($urandom); wdata1[t] = data_t'($urandom); end
      shadow[i] = we0 ? wdata0 : wdata1;
    end
    @(negedge clk); we0 = 0; we1 = 0;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); raddr0 = 9'(i); raddr1 = 9'(63 - i); raddr2 = 9'((i * 5) % 64);
      @(posedge clk); #1;
      checks += 3;
      if (rdata0 != shadow[i])            failures++;
      if (rdata1 != shadow[63 - i])       failures++;
      if (rdata2 != shadow[(i * 5) % 64]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
