// tb_pg: one processing group driven with hand-made control words.
//  * MAT path: 8 vectors written into the aux buffer from outside, a 2-chunk
//    pointwise accumulation on the MAT engine, result at s2 through
//    post-processing (shift 4) compared with a reference.
//  * RPE path: a 2-chunk PW accumulation with the input from buffer B and
//    weights from the A slice, captured as a row into the aux buffer and read
//    back through the external read port.
//  * Attention division: divisors stored, then a dividend divided by them.
`timescale 1ns/1ps
module tb_pg;
  import evit_pkg::*;
  localparam int M = 8, N = 8, S = 8, T = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  rpe_ctl_t rctl = '0; mat_ctl_t mctl = '0;
  data_t [M-1:0][N-1:0] a_slice = '0;
  data_t [S-1:0][T-1:0] c_slice = '0;
  logic b_we = 0, x_we = 0;
  logic [B_AW-1:0] b_waddr = '0; data_t [N-1:0] b_wdata = '0;
  logic [X_AW-1:0] x_waddr = '0, x_raddr = '0; data_t [T-1:0] x_wdata = '0, x_rdata;
  data_t [S-1:0] y;
  logic rearr_busy, aux_wr; logic [3:0] aux_wr_tag;
  pg #(.M(M), .N(N), .S(S), .T(T)) dut (.*);

  function automatic int m_rq(input longint acc, input int sh);
    longint v; v = acc >>> sh;
    return (v > 127) ? 127 : (v < -128) ? -128 : int'(v);
  endfunction
  task automatic chk(input int g, input int e, input string s);
    checks++; if (g != e) begin failures++; $display("FAIL %s: %0d vs %0d", s, g, e); end
  endtask

  data_t [T-1:0] xv [2];
  data_t [S-1:0][T-1:0] cw [2];
  data_t [N-1:0] bv [2];
  data_t [M-1:0][N-1:0] av [2];
  longint e;
  acc_t dv [S];
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    // ---- MAT path
    for (int c = 0; c < 2; c++) begin
      foreach (xv[c][t]) xv[c][t] = data_t'($urandom);
      foreach (cw[c][s, t]) cw[c][s][t] = data_t'($urandom);
      @(negedge clk); x_we = 1; x_waddr = X_AW'(5 + c); x_wdata = xv[c];
    end
    @(negedge clk); x_we = 0;
    mctl.shift = 4; mctl.act = ACT_NONE;
    mctl.x_raddr = 5;                               // s0 chunk 0
    @(negedge clk); mctl.x_raddr = 6; mctl.en = 1; mctl.clr = 1; c_slice = cw[0];  // s1 chunk 0
    @(negedge clk); mctl.clr = 0; c_slice = cw[1];                                  // s1 chunk 1
    @(negedge clk); mctl.en = 0; mctl.out = 1;                                       // s2
    #1;
    for (int s = 0; s < S; s++) begin
      e = 0; for (int c = 0; c < 2; c++) for (int t = 0; t < T; t++) e += longint'(xv[c][t]) * longint'(cw[c][s][t]);
      chk(int'(y[s]), m_rq(e, 4), $sformatf("MAT PW lane %0d", s));
    end
    @(negedge clk); mctl.out = 0;
    // ---- RPE PW path, output row to aux address 20
    for (int c = 0; c < 2; c++) begin
      foreach (bv[c][n]) bv[c][n] = data_t'($urandom);
      foreach (av[c][j, n]) av[c][j][n] = data_t'($urandom);
      @(negedge clk); b_we = 1; b_waddr = B_AW'(c); b_wdata = bv[c];
    end
    @(negedge clk); b_we = 0;
    rctl.b_raddr = 0;
    @(negedge clk); rctl.b_raddr = 1; rctl.en = 1; rctl.clr = 1; rctl.mode_pw = 1; a_slice = av[0];
    @(negedge clk); rctl.clr = 0; a_slice = av[1];
    @(negedge clk); rctl.en = 0; rctl.cap = 1; rctl.cap_mode = CAP_ROW; rctl.trig = 1; rctl.wbase = 20;
    rctl.tag = 2; rctl.shift = 5; rctl.act = ACT_NONE;
    @(negedge clk); rctl.cap = 0;
    chk(int'(aux_wr), 1, "aux write after capture");
    @(negedge clk); x_raddr = 20;
    @(negedge clk);
    for (int j = 0; j < M; j++) begin
      e = 0; for (int c = 0; c < 2; c++) for (int n = 0; n < N; n++) e += longint'(av[c][j][n]) * longint'(bv[c][n]);
      chk(int'(x_rdata[j]), m_rq(e, 5), $sformatf("RPE PW line %0d", j));
    end
    // ---- division: divisors = Q.x, then dividend = Q.x2 divided by them
    foreach (cw[0][s, t]) cw[0][s][t] = data_t'($urandom_range(1, 20));
    @(negedge clk); mctl = '0; mctl.x_raddr = 5;
    @(negedge clk); mctl.en = 1; mctl.clr = 1; mctl.relu_w = 1; c_slice = cw[0];
    xv[0] = dut.u_aux.mem[5];
    @(negedge clk); mctl.en = 0; mctl.out = 1; mctl.to_div = 1;
    for (int s = 0; s < S; s++) dv[s] = dut.macc[s];
    @(negedge clk); mctl.out = 0; mctl.to_div = 0; mctl.x_raddr = 6;
    @(negedge clk); mctl.en = 1; mctl.clr = 1;
    @(negedge clk); mctl.en = 0; mctl.out = 1; mctl.div_mode = 1; mctl.shift = 3;
    #1;
    for (int s = 0; s < S; s++) begin
      longint d, nn, q;
      d = 0; nn = 0;
      for (int t = 0; t < T; t++) begin d += longint'(xv[0][t]) * cw[0][s][t]; nn += longint'(xv[1][t]) * cw[0][s][t]; end
      q = (d == 0) ? 0 : (nn <<< 3) / d;
      q = (q > 127) ? 127 : (q < -128) ? -128 : q;
      chk(int'(y[s]), int'(q), $sformatf("division lane %0d", s));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
