// tb_sdp_ram: random writes and reads against a shadow array; checks the
// one-cycle read latency and read-before-write on the same address.
`timescale 1ns/1ps
module tb_sdp_ram;
  localparam int W = 64, DEPTH = 256;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 0; logic [7:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata, shadow [DEPTH], old;
  sdp_ram #(.W(W), .DEPTH(DEPTH)) dut (.*);
  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; waddr = 8'(i); wdata = {$urandom, $urandom}; shadow[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      raddr = 8'($urandom); we = i[0]; waddr = raddr; wdata = {$urandom, $urandom};
      old = shadow[raddr];
      if (we) shadow[waddr] = wdata;
      @(posedge clk); #1;
      checks++; if (rdata != old) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
