// tb_evit_accel: end-to-end test of the accelerator at its default size
// (16 groups of 8x8 + 8x8 multipliers).
//
// Every processing group gets its own random data and the results are
// compared with a reference computed here from the same data:
//  1. MBConv-style fusion: two 3x3 stride-1 depthwise jobs (16 channels,
//     Hardswish) on the RPE while the MAT runs the following pointwise layer
//     (8 of its 16 output channels) from the auxiliary buffer, waiting for the
//     depthwise results; afterwards the RPE computes the other 8 output
//     channels of the same pointwise layer from the auxiliary buffer.
//  2. A 3x3 stride-2 depthwise job (ReLU).
//  3. Two attention heads: ReLU(K)^T V and Ksum on the RPE, then Q(KV),
//     Q(Ksum) and the division on the MAT; head 2's KV overlaps head 1's Q(KV).
// It counts how often each mechanism happened (MAT waits on the auxiliary
// buffer, RPE stalls on re-arrange, both engines busy in the same cycle,
// stride 2, RPE input from the aux buffer, KV, division, Hardswish) and
// fails any that never did. The RPE cycle count is checked against the
// k*k / chunk loop counts.
`timescale 1ns/1ps
module tb_evit_accel;
  import evit_pkg::*;
  localparam int L = 16, M = 8, N = 8, S = 8, T = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic rpe_job_valid = 0, mat_job_valid = 0;
  rpe_job_t rpe_job; mat_job_t mat_job;
  logic rpe_job_ready, mat_job_ready, rpe_idle, mat_idle;
  logic rpe_fire, rpe_stall, mat_fire, mat_stall;
  logic a_we = 0, c_we = 0;
  logic [A_AW-1:0] a_waddr = '0; logic [C_AW-1:0] c_waddr = '0;
  data_t [L-1:0][M-1:0][N-1:0] a_wdata = '0;
  data_t [L-1:0][S-1:0][T-1:0] c_wdata = '0;
  logic [L-1:0] b_we = '0, x_we = '0;
  logic [B_AW-1:0] b_waddr = '0; data_t [N-1:0] b_wdata = '0;
  logic [X_AW-1:0] x_waddr = '0, x_raddr = '0; data_t [T-1:0] x_wdata = '0;
  logic [3:0] x_rsel = '0; data_t [T-1:0] x_rdata;
  logic [O_AW-1:0] o_raddr = '0; data_t [L-1:0][S-1:0] o_rdata;

  evit_accel dut (.*);

  // ------------------------------------------------------------ reference
  function automatic int m_sat(input longint v);
    return (v > 127) ? 127 : (v < -128) ? -128 : int'(v);
  endfunction
  function automatic int m_rq(input longint acc, input int sh, input int act);
    int q; longint r;
    q = m_sat(acc >>> sh);
    if (act == 1 && q < 0) q = 0;
    if (act == 2) begin
      r = q + 48; if (r < 0) r = 0; if (r > 96) r = 96;
      q = m_sat((longint'(q) * r) / 96);
    end
    return q;
  endfunction
  function automatic int rnd();  // -8..7
    return int'($urandom_range(0, 15)) - 8;
  endfunction

  // Test data
  int X  [L][3][10][16];
  int Wd [16][3][3];
  int Wp [16][16];
  int X2 [L][3][17][8];
  int Wd2[8][3][3];
  int K  [2][L][16][16];  // [head][pg][token][feature]
  int V  [2][L][16][16];
  int Q  [2][L][8][16];
  int D  [L][8][16];      // depthwise outputs, pixel x channel

  // Mechanism counters
  int n_mat_wait = 0, n_rpe_stall = 0, n_overlap = 0, n_rpe_fire = 0, n_mat_fire = 0;
  always @(posedge clk) if (rst_n) begin
    n_mat_wait  += int'(mat_stall);
    n_rpe_stall += int'(rpe_stall);
    n_overlap   += int'(rpe_fire && mat_fire);
    n_rpe_fire  += int'(rpe_fire);
    n_mat_fire  += int'(mat_fire);
  end

  // ------------------------------------------------------------ helpers
  task automatic wr_a(input int addr, input data_t [L-1:0][M-1:0][N-1:0] w);
    @(negedge clk); a_we = 1; a_waddr = A_AW'(addr); a_wdata = w;
    @(negedge clk); a_we = 0;
  endtask
  task automatic wr_c(input int addr, input data_t [L-1:0][S-1:0][T-1:0] w);
    @(negedge clk); c_we = 1; c_waddr = C_AW'(addr); c_wdata = w;
    @(negedge clk); c_we = 0;
  endtask
  task automatic wr_b(input logic [L-1:0] sel, input int addr, input data_t [N-1:0] w);
    @(negedge clk); b_we = sel; b_waddr = B_AW'(addr); b_wdata = w;
    @(negedge clk); b_we = '0;
  endtask
  task automatic push_rpe(input rpe_job_t j);
    @(negedge clk); rpe_job = j; rpe_job_valid = 1;
    while (!rpe_job_ready) @(negedge clk);
    @(negedge clk); rpe_job_valid = 0;
  endtask
  task automatic push_mat(input mat_job_t j);
    @(negedge clk); mat_job = j; mat_job_valid = 1;
    while (!mat_job_ready) @(negedge clk);
    @(negedge clk); mat_job_valid = 0;
  endtask
  task automatic wait_idle();
    @(negedge clk);
    while (!(rpe_idle && mat_idle && rpe_job_ready && mat_job_ready)) @(negedge clk);
    repeat (3) @(negedge clk);
  endtask
  task automatic chk(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("MISMATCH %s: got %0d expected %0d", what, got, exp);
    end
  endtask
  task automatic rd_aux(input int pgi, input int addr, output data_t [T-1:0] v);
    @(negedge clk); x_rsel = 4'(pgi); x_raddr = X_AW'(addr);
    @(negedge clk); @(negedge clk); v = x_rdata;
  endtask
  task automatic rd_out(input int addr, output data_t [L-1:0][S-1:0] v);
    @(negedge clk); o_raddr = O_AW'(addr);
    @(negedge clk); v = o_rdata;
  endtask

  rpe_job_t rj; mat_job_t mj;
  data_t [L-1:0][M-1:0][N-1:0] aw;
  data_t [L-1:0][S-1:0][T-1:0] cw;
  data_t [N-1:0] bw;
  data_t [T-1:0] xv;
  data_t [L-1:0][S-1:0] ov;
  longint acc;
  int exp_fire;
  int fire0;

  initial begin : main
    for (int l = 0; l < L; l++) begin
      for (int r = 0; r < 3; r++) for (int x = 0; x < 10; x++) for (int c = 0; c < 16; c++) X[l][r][x][c] = rnd();
      for (int r = 0; r < 3; r++) for (int x = 0; x < 17; x++) for (int c = 0; c < 8; c++) X2[l][r][x][c] = rnd();
      for (int h = 0; h < 2; h++) begin
        for (int n = 0; n < 16; n++) for (int a = 0; a < 16; a++) begin K[h][l][n][a] = rnd(); V[h][l][n][a] = rnd(); end
        for (int i = 0; i < 8; i++) for (int a = 0; a < 16; a++) Q[h][l][i][a] = rnd();
      end
    end
    for (int c = 0; c < 16; c++) for (int r = 0; r < 3; r++) for (int q = 0; q < 3; q++) Wd[c][r][q] = rnd();
    for (int c = 0; c < 8; c++)  for (int r = 0; r < 3; r++) for (int q = 0; q < 3; q++) Wd2[c][r][q] = rnd();
    for (int o = 0; o < 16; o++) for (int c = 0; c < 16; c++) Wp[o][c] = rnd();

    repeat (3) @(negedge clk); rst_n = 1;

    // ---------------- load buffers
    // Depthwise stride 1, channel group g: A[g*9 + r*3 + step], B[g*9 + r*3 + tap]
    for (int g = 0; g < 2; g++) for (int r = 0; r < 3; r++) for (int st = 0; st < 3; st++) begin
      aw = '0;
      for (int l = 0; l < L; l++)
        if (st == 0) begin
          for (int j = 0; j < M; j++) for (int n = 0; n < N; n++) aw[l][j][n] = data_t'(X[l][r][j][g*8+n]);
        end else begin
          for (int n = 0; n < N; n++) aw[l][0][n] = data_t'(X[l][r][7+st][g*8+n]);
        end
      wr_a(g*9 + r*3 + st, aw);
      for (int n = 0; n < N; n++) bw[n] = data_t'(Wd[g*8+n][r][st]);
      wr_b('1, g*9 + r*3 + st, bw);
    end
    // Pointwise weights for the RPE part (out channels 8..15): A[18 + chunk]
    for (int c = 0; c < 2; c++) begin
      aw = '0;
      for (int l = 0; l < L; l++) for (int j = 0; j < M; j++) for (int n = 0; n < N; n++) aw[l][j][n] = data_t'(Wp[8+j][c*8+n]);
      wr_a(18 + c, aw);
    end
    // Pointwise weights for the MAT part (out channels 0..7): C[chunk]
    for (int c = 0; c < 2; c++) begin
      cw = '0;
      for (int l = 0; l < L; l++) for (int s = 0; s < S; s++) for (int t = 0; t < T; t++) cw[l][s][t] = data_t'(Wp[s][c*8+t]);
      wr_c(c, cw);
    end
    // Depthwise stride 2: per row, step 0 = even columns 0..14 (load),
    // step 1 = column 16 (shift), step 2 = odd columns 1..15 (load). A[20 + r*3 + step]
    for (int r = 0; r < 3; r++) for (int st = 0; st < 3; st++) begin
      aw = '0;
      for (int l = 0; l < L; l++)
        if (st == 1) for (int n = 0; n < N; n++) aw[l][0][n] = data_t'(X2[l][r][16][n]);
        else for (int j = 0; j < M; j++) for (int n = 0; n < N; n++) aw[l][j][n] = data_t'(X2[l][r][2*j + (st == 2 ? 1 : 0)][n]);
      wr_a(20 + r*3 + st, aw);
    end
    for (int r = 0; r < 3; r++) for (int q = 0; q < 3; q++) begin
      for (int n = 0; n < N; n++) bw[n] = data_t'(Wd2[n][r][q]);
      wr_b('1, 20 + r*3 + q, bw);
    end
    // Attention: V at A[30 + h*4 + bg*2 + tc], K^T at B[64 + h*32 + a*2 + tc], Q at C[8 + h*2 + ag]
    for (int h = 0; h < 2; h++) begin
      for (int bg = 0; bg < 2; bg++) for (int tc = 0; tc < 2; tc++) begin
        aw = '0;
        for (int l = 0; l < L; l++) for (int j = 0; j < M; j++) for (int n = 0; n < N; n++)
          aw[l][j][n] = data_t'(V[h][l][tc*8+n][bg*8+j]);
        wr_a(30 + h*4 + bg*2 + tc, aw);
      end
      for (int l = 0; l < L; l++) for (int a = 0; a < 16; a++) for (int tc = 0; tc < 2; tc++) begin
        for (int n = 0; n < N; n++) bw[n] = data_t'(K[h][l][tc*8+n][a]);
        wr_b(L'(1) << l, 64 + h*32 + a*2 + tc, bw);
      end
      for (int ag = 0; ag < 2; ag++) begin
        cw = '0;
        for (int l = 0; l < L; l++) for (int s = 0; s < S; s++) for (int t = 0; t < T; t++) cw[l][s][t] = data_t'(Q[h][l][s][ag*8+t]);
        wr_c(8 + h*2 + ag, cw);
      end
    end

    // ---------------- test 1: fused DW -> PW
    fire0 = n_rpe_fire;
    mj = '0; mj.op = MAT_PW; mj.count = 8; mj.chunks = 2; mj.in_base = 0; mj.pstride = 1; mj.cstride = 8;
    mj.c_base = 0; mj.out_base = 0; mj.shift = 4; mj.act = ACT_NONE; mj.wait_en = 1; mj.wait_seq = 1;
    push_mat(mj);
    for (int g = 0; g < 2; g++) begin
      rj = '0; rj.op = OP_DW; rj.k = 3; rj.stride2 = 0; rj.count = 1; rj.a_base = A_AW'(g*9);
      rj.in_base = X_AW'(g*9); rj.aux_wbase = X_AW'(g*8); rj.shift = 3; rj.act = ACT_HSWISH; rj.seq = 1;
      push_rpe(rj);
    end
    rj = '0; rj.op = OP_PW; rj.src_aux = 1; rj.count = 8; rj.chunks = 2; rj.a_base = 18; rj.in_base = 0;
    rj.pstride = 1; rj.cstride = 8; rj.aux_wbase = 32; rj.shift = 4; rj.act = ACT_NONE; rj.seq = 2;
    rj.wait_en = 1; rj.wait_seq = 1;
    push_rpe(rj);
    wait_idle();
    chk(n_rpe_fire - fire0, 2*9 + 8*2, "RPE cycles of 2 DW tiles + 8 PW passes");

    for (int l = 0; l < L; l++) for (int p = 0; p < 8; p++) for (int c = 0; c < 16; c++) begin
      acc = 0;
      for (int r = 0; r < 3; r++) for (int q = 0; q < 3; q++) acc += X[l][r][p+q][c] * Wd[c][r][q];
      D[l][p][c] = m_rq(acc, 3, 2);
    end
    for (int l = 0; l < L; l++) for (int g = 0; g < 2; g++) for (int p = 0; p < 8; p++) begin
      rd_aux(l, g*8 + p, xv);
      for (int n = 0; n < N; n++) chk(int'(xv[n]), D[l][p][g*8+n], $sformatf("DW pg%0d px%0d ch%0d", l, p, g*8+n));
    end
    for (int p = 0; p < 8; p++) begin
      rd_out(p, ov);
      for (int l = 0; l < L; l++) for (int s = 0; s < S; s++) begin
        acc = 0; for (int c = 0; c < 16; c++) acc += D[l][p][c] * Wp[s][c];
        chk(int'(ov[l][s]), m_rq(acc, 4, 0), $sformatf("PW(MAT) pg%0d px%0d oc%0d", l, p, s));
      end
    end
    for (int l = 0; l < L; l++) for (int p = 0; p < 8; p++) begin
      rd_aux(l, 32 + p, xv);
      for (int j = 0; j < M; j++) begin
        acc = 0; for (int c = 0; c < 16; c++) acc += D[l][p][c] * Wp[8+j][c];
        chk(int'(xv[j]), m_rq(acc, 4, 0), $sformatf("PW(RPE) pg%0d px%0d oc%0d", l, p, 8+j));
      end
    end

    // ---------------- test 2: DW stride 2
    fire0 = n_rpe_fire;
    rj = '0; rj.op = OP_DW; rj.k = 3; rj.stride2 = 1; rj.count = 1; rj.a_base = 20; rj.in_base = 20;
    rj.aux_wbase = 48; rj.shift = 3; rj.act = ACT_RELU; rj.seq = 3;
    push_rpe(rj);
    wait_idle();
    chk(n_rpe_fire - fire0, 9, "RPE cycles of a stride-2 DW tile");
    for (int l = 0; l < L; l++) for (int p = 0; p < 8; p++) begin
      rd_aux(l, 48 + p, xv);
      for (int n = 0; n < N; n++) begin
        acc = 0;
        for (int r = 0; r < 3; r++) for (int q = 0; q < 3; q++) acc += X2[l][r][2*p+q][n] * Wd2[n][r][q];
        chk(int'(xv[n]), m_rq(acc, 3, 1), $sformatf("DWs2 pg%0d px%0d ch%0d", l, p, n));
      end
    end

    // ---------------- test 3: two attention heads
    fire0 = n_rpe_fire;
    for (int h = 0; h < 2; h++) begin
      mj = '0; mj.op = MAT_MSA; mj.count = 17; mj.chunks = 2; mj.in_base = X_AW'(64 + h*34);
      mj.pstride = 1; mj.cstride = 17; mj.c_base = C_AW'(8 + h*2); mj.out_base = O_AW'(16 + h*16);
      mj.shift = 2; mj.wait_en = 1; mj.wait_seq = 4'(4 + h);
      rj = '0; rj.op = OP_KV; rj.count = 2; rj.count2 = 2; rj.chunks = 2; rj.a_base = A_AW'(30 + h*4);
      rj.in_base = X_AW'(64 + h*32); rj.aux_wbase = X_AW'(64 + h*34); rj.shift = 3; rj.act = ACT_NONE;
      rj.seq = 4'(4 + h);
      fork
        push_rpe(rj);
        push_mat(mj);
      join
    end
    wait_idle();
    chk(n_rpe_fire - fire0, 2 * (2*2*8*2), "RPE cycles of two KV jobs");
    for (int h = 0; h < 2; h++) for (int b = 0; b < 16; b++) begin
      rd_out(16 + h*16 + b, ov);
      for (int l = 0; l < L; l++) for (int i = 0; i < 8; i++) begin
        longint num, den, z, ks, q;
        num = 0; den = 0;
        for (int a = 0; a < 16; a++) begin
          z = 0; ks = 0;
          for (int n = 0; n < 16; n++) begin
            int kr; kr = (K[h][l][n][a] < 0) ? 0 : K[h][l][n][a];
            z += kr * V[h][l][n][b]; ks += kr;
          end
          q = (Q[h][l][i][a] < 0) ? 0 : Q[h][l][i][a];
          num += q * m_rq(z, 3, 0);
          den += q * m_rq(ks, 3, 0);
        end
        chk(int'(ov[l][i]), (den == 0) ? 0 : m_sat((num <<< 2) / den),
            $sformatf("MSA h%0d pg%0d tok%0d col%0d", h, l, i, b));
      end
    end

    // ---------------- mechanisms
    $display("mechanisms: mat_wait=%0d rpe_stall=%0d overlap=%0d rpe_fire=%0d mat_fire=%0d",
             n_mat_wait, n_rpe_stall, n_overlap, n_rpe_fire, n_mat_fire);
    checks += 3;
    if (n_mat_wait == 0)  begin failures++; $display("MISSING: MAT never waited for the aux buffer"); end
    if (n_rpe_stall == 0) begin failures++; $display("MISSING: RPE never stalled on re-arrange"); end
    if (n_overlap == 0)   begin failures++; $display("MISSING: engines never overlapped"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
