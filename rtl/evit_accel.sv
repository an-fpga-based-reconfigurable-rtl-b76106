// evit_accel: top level of the EfficientViT accelerator.
//
// L processing groups (pg), each with an RPE engine of M x N multipliers and a
// MAT engine of S x T multipliers - (8x8 + 8x8) x 16 by default, the paper's
// configuration - plus the global buffers A and C, the output buffer and the
// TMP controller. Buffer A (DW inputs, PW weights, attention V) and buffer C
// (PW weights for the MAT, attention Q) are read once per cycle; each word is
// split into L slices, slice l going to PG l (the host replicates data that
// all groups share). All groups run in lockstep on the same controls. The
// output buffer stores, per write, the S int8 results of every group.
//
// Outside interfaces, all synchronous to clk:
//  * rpe_job / mat_job with valid/ready: layer jobs for the two engines.
//  * a_*, c_*: write ports of buffers A and C; b_*: buffer B of the groups
//    selected by b_we[l]; x_*: write port of the aux buffers (x_we[l]) and a
//    read port (group x_rsel, data one cycle later); o_*: output buffer read
//    (data one cycle later). These stand in for the off-chip DRAM transfers.
//  * rpe_idle / mat_idle; rpe_fire / mat_fire (an engine cycle was issued)
//    and rpe_stall / mat_stall (an engine waited) for performance counting.
//
// Lint notes. The groups run in lockstep, so the re-arrange status of group 0
// (busy, write strobe, tag) stands for all of them; the copies of groups
// 1..L-1 are left unconnected and are reported as unused bits. rst_n is also
// reported as used both synchronously and asynchronously: the synchronous use
// is only the `disable iff` of a simulation assertion in rearrange, not logic.
module evit_accel
  import evit_pkg::*;
#(
  parameter int L = 16,
  parameter int M = 8,
  parameter int N = 8,
  parameter int S = 8,
  parameter int T = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      rpe_job_valid,
  input  rpe_job_t                  rpe_job,
  output logic                      rpe_job_ready,
  input  logic                      mat_job_valid,
  input  mat_job_t                  mat_job,
  output logic                      mat_job_ready,
  output logic                      rpe_idle,
  output logic                      mat_idle,
  output logic                      rpe_fire,
  output logic                      rpe_stall,
  output logic                      mat_fire,
  output logic                      mat_stall,
  input  logic                      a_we,
  input  logic [A_AW-1:0]           a_waddr,
  input  data_t [L-1:0][M-1:0][N-1:0] a_wdata,
  input  logic                      c_we,
  input  logic [C_AW-1:0]           c_waddr,
  input  data_t [L-1:0][S-1:0][T-1:0] c_wdata,
  input  logic [L-1:0]              b_we,
  input  logic [B_AW-1:0]           b_waddr,
  input  data_t [N-1:0]             b_wdata,
  input  logic [L-1:0]              x_we,
  input  logic [X_AW-1:0]           x_waddr,
  input  data_t [T-1:0]             x_wdata,
  input  logic [X_AW-1:0]           x_raddr,
  input  logic [$clog2(L)-1:0]      x_rsel,
  output data_t [T-1:0]             x_rdata,
  input  logic [O_AW-1:0]           o_raddr,
  output data_t [L-1:0][S-1:0]      o_rdata
);

  logic [A_AW-1:0] a_raddr;
  logic [C_AW-1:0] c_raddr;
  rpe_ctl_t        rctl;
  mat_ctl_t        mctl;
  logic            out_we;
  logic [O_AW-1:0] out_waddr;

  data_t [L-1:0][M-1:0][N-1:0] a_rd;
  data_t [L-1:0][S-1:0][T-1:0] c_rd;
  data_t [L-1:0][S-1:0]        y_all;
  data_t [L-1:0][T-1:0]        x_rd_all;
  logic  [L-1:0]               busy_all, wr_all;
  logic  [L-1:0][3:0]          tag_all;
  logic  [$clog2(L)-1:0]       x_rsel_q;

  sdp_ram #(.W(L*M*N*DATA_W), .DEPTH(1 << A_AW)) u_buf_a (
    .clk(clk), .we(a_we), .waddr(a_waddr), .wdata(a_wdata), .raddr(a_raddr), .rdata(a_rd)
  );

  sdp_ram #(.W(L*S*T*DATA_W), .DEPTH(1 << C_AW)) u_buf_c (
    .clk(clk), .we(c_we), .waddr(c_waddr), .wdata(c_wdata), .raddr(c_raddr), .rdata(c_rd)
  );

  sdp_ram #(.W(L*S*DATA_W), .DEPTH(1 << O_AW)) u_buf_out (
    .clk(clk), .we(out_we), .waddr(out_waddr), .wdata(y_all), .raddr(o_raddr), .rdata(o_rdata)
  );

  tmp_ctrl #(.M(M), .T(T)) u_ctrl (
    .clk(clk), .rst_n(rst_n),
    .rpe_job_valid(rpe_job_valid), .rpe_job(rpe_job), .rpe_job_ready(rpe_job_ready),
    .mat_job_valid(mat_job_valid), .mat_job(mat_job), .mat_job_ready(mat_job_ready),
    .rearr_busy(busy_all[0]), .aux_wr(wr_all[0]), .aux_wr_tag(tag_all[0]),
    .a_raddr(a_raddr), .c_raddr(c_raddr), .rctl(rctl), .mctl(mctl),
    .out_we(out_we), .out_waddr(out_waddr), .rpe_idle(rpe_idle), .mat_idle(mat_idle),
    .rpe_fire(rpe_fire), .rpe_stall(rpe_stall), .mat_fire(mat_fire), .mat_stall(mat_stall)
  );

  for (genvar l = 0; l < L; l++) begin : g_pg
    pg #(.M(M), .N(N), .S(S), .T(T)) u_pg (
      .clk(clk), .rst_n(rst_n), .rctl(rctl), .mctl(mctl),
      .a_slice(a_rd[l]), .c_slice(c_rd[l]),
      .b_we(b_we[l]), .b_waddr(b_waddr), .b_wdata(b_wdata),
      .x_we(x_we[l]), .x_waddr(x_waddr), .x_wdata(x_wdata),
      .x_raddr(x_raddr), .x_rdata(x_rd_all[l]),
      .y(y_all[l]), .rearr_busy(busy_all[l]), .aux_wr(wr_all[l]), .aux_wr_tag(tag_all[l])
    );
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) x_rsel_q <= '0;
    else        x_rsel_q <= x_rsel;
  assign x_rdata = x_rd_all[x_rsel_q];

endmodule
