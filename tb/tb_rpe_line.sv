// tb_rpe_line: checks both accumulation modes of one PE line against sums
// computed here: DW self-accumulation (N independent sums over 9 cycles, as a
// 3x3 window) and PW down-forward accumulation (dot product over 4 cycles in
// the last MAC). Also checks that clr restarts the sums.
`timescale 1ns/1ps
module tb_rpe_line;
  import evit_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic mode_pw = 0, en = 0, clr = 0;
  data_t [N-1:0] a, w;
  acc_t  [N-1:0] acc;
  longint ref_dw [N];
  longint ref_pw;
  rpe_line #(.N(N)) dut (.*);

  task automatic run(input bit pw, input int cycles);
    for (int n = 0; n < N; n++) ref_dw[n] = 0;
    ref_pw = 0;
    for (int c = 0; c < cycles; c++) begin
      @(negedge clk);
      mode_pw = pw; en = 1; clr = (c == 0);
      for (int n = 0; n < N; n++) begin
        a[n] = data_t'($urandom); w[n] = data_t'($urandom);
        ref_dw[n] += longint'(a[n]) * longint'(w[n]);
        ref_pw    += longint'(a[n]) * longint'(w[n]);
      end
    end
    @(negedge clk); en = 0;
    if (!pw) for (int n = 0; n < N; n++) begin
      checks++; if (acc[n] != acc_t'(ref_dw[n])) begin failures++; $display("DW n=%0d got %0d exp %0d", n, acc[n], ref_dw[n]); end
    end else begin
      checks++; if (acc[N-1] != acc_t'(ref_pw)) begin failures++; $display("PW got %0d exp %0d", acc[N-1], ref_pw); end
    end
  endtask

  initial begin
    a = '0; w = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (4) begin run(0, 9); run(1, 4); run(0, 1); run(1, 1); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
