// tb_rpe_engine: drives the RPE array with the depthwise load schedule of the
// paper (stride 1: load, shift, shift per kernel row; stride 2: load even
// pixels, shift, load odd pixels) for a 3x3 kernel and compares the M x N
// outputs after k*k = 9 cycles with a direct convolution; then checks PW
// mode (broadcast input, per-line weights) against dot products.
`timescale 1ns/1ps
module tb_rpe_engine;
  import evit_pkg::*;
  localparam int M = 8, N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic mode_pw = 0, en = 0, clr = 0, dw_load = 0, dw_shift = 0;
  data_t [M-1:0][N-1:0] a_par;
  data_t [N-1:0] a_new, w_dw, b_bc;
  acc_t [M-1:0][N-1:0] acc;
  rpe_engine #(.M(M), .N(N)) dut (.*);

  int img [3][17][N];
  int wk  [3][3][N];
  int cyc;

  task automatic step(input bit ld, input int r, input int tap, input int col0, input int colstep, input int newcol);
    @(negedge clk);
    en = 1; mode_pw = 0; clr = (cyc == 0); dw_load = ld; dw_shift = !ld;
    a_par = '0; a_new = '0;
    for (int n = 0; n < N; n++) begin
      for (int j = 0; j < M; j++) a_par[j][n] = data_t'(img[r][col0 + colstep*j][n]);
      a_new[n] = data_t'(img[r][newcol][n]);
      w_dw[n] = data_t'(wk[r][tap][n]);
    end
    cyc++;
  endtask

  task automatic check_dw(input int s);
    @(negedge clk); en = 0;
    for (int j = 0; j < M; j++) for (int n = 0; n < N; n++) begin
      longint e; e = 0;
      for (int r = 0; r < 3; r++) for (int q = 0; q < 3; q++) e += img[r][s*j+q][n] * wk[r][q][n];
      checks++;
      if (acc[j][n] != acc_t'(e)) begin failures++; if (failures < 10) $display("DW s%0d j%0d n%0d got %0d exp %0d", s, j, n, acc[j][n], e); end
    end
  endtask

  initial begin
    a_par = '0; a_new = '0; w_dw = '0; b_bc = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (3) begin
      foreach (img[r, x, n]) img[r][x][n] = int'($urandom_range(0, 255)) - 128;
      foreach (wk[r, q, n]) wk[r][q][n] = int'($urandom_range(0, 255)) - 128;
      // stride 1: load 0..7 / shift in 8 / shift in 9 (taps 0,1,2)
      cyc = 0;
      for (int r = 0; r < 3; r++) begin
        step(1, r, 0, 0, 1, 0); step(0, r, 1, 0, 1, 8); step(0, r, 2, 0, 1, 9);
      end
      checks++; if (cyc != 9) failures++;
      check_dw(1);
      // stride 2: load even cols (tap 0) / shift in col 16 (tap 2) / load odd cols (tap 1)
      cyc = 0;
      for (int r = 0; r < 3; r++) begin
        step(1, r, 0, 0, 2, 0); step(0, r, 2, 0, 2, 16); step(1, r, 1, 1, 2, 0);
      end
      check_dw(2);
      // PW: 3 chunks
      begin
        longint e [M];
        for (int j = 0; j < M; j++) e[j] = 0;
        for (int c = 0; c < 3; c++) begin
          @(negedge clk); en = 1; mode_pw = 1; clr = (c == 0); dw_load = 0; dw_shift = 0;
          for (int n = 0; n < N; n++) b_bc[n] = data_t'($urandom);
          for (int j = 0; j < M; j++) for (int n = 0; n < N; n++) begin
            a_par[j][n] = data_t'($urandom);
            e[j] += longint'(a_par[j][n]) * longint'(b_bc[n]);
          end
        end
        @(negedge clk); en = 0;
        for (int j = 0; j < M; j++) begin
          checks++; if (acc[j][N-1] != acc_t'(e[j])) begin failures++; $display("PW j%0d got %0d exp %0d", j, acc[j][N-1], e[j]); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
