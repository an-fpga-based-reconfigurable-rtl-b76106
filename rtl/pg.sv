// pg: one processing group (PG) of the accelerator.
//
// Holds an RPE engine (M PE lines x N MACs) and a MAT engine (S MATs x T
// multipliers) joined by the re-arrange unit and the auxiliary buffer:
//
//   buffer B ---+--> [ReLU in KV] --> RPE engine --> requant --> re-arrange
//   aux rd0 ----+   (selector)    \-> K-adder-tree ---/            |
//   buffer A slice -----------------> RPE (split to M lines)       v
//                                                           auxiliary buffer
//   buffer C slice --> MAT engine (split to S MATs) <-- aux rd1 ---+
//                          |--> divisor buffer --+
//                          +--> post-processing <+--> y (to output buffer)
//
// Buffer B (DW weights, PW inputs, attention K) sits inside the group; its
// words, or aux-buffer words (so the RPE can take part in a pointwise layer
// whose input the RPE itself produced), are broadcast to the M PE lines.
// The connections follow the paper's architecture figure; the requantization
// before re-arrange and the control timing (see tmp_ctrl) are this design's.
//
// Timing: all controls come from tmp_ctrl; buffer reads take one cycle, the
// engines update one cycle after the read address, results are used at s2.
module pg
  import evit_pkg::*;
#(
  parameter int M = 8,
  parameter int N = 8,
  parameter int S = 8,
  parameter int T = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  rpe_ctl_t             rctl,
  input  mat_ctl_t             mctl,
  input  data_t [M-1:0][N-1:0] a_slice,
  input  data_t [S-1:0][T-1:0] c_slice,
  input  logic                 b_we,
  input  logic [B_AW-1:0]      b_waddr,
  input  data_t [N-1:0]        b_wdata,
  input  logic                 x_we,
  input  logic [X_AW-1:0]      x_waddr,
  input  data_t [T-1:0]        x_wdata,
  input  logic [X_AW-1:0]      x_raddr,
  output data_t [T-1:0]        x_rdata,
  output data_t [S-1:0]        y,
  output logic                 rearr_busy,
  output logic                 aux_wr,
  output logic [3:0]           aux_wr_tag
);

  if (M != N || N != T) begin : g_chk
    $error("pg: this implementation requires M == N == T");
  end

  // Buffer B
  data_t [N-1:0] b_rd;
  sdp_ram #(.W(N*DATA_W), .DEPTH(1 << B_AW)) u_buf_b (
    .clk(clk), .we(b_we), .waddr(b_waddr), .wdata(b_wdata),
    .raddr(rctl.b_raddr), .rdata(b_rd)
  );

  // Auxiliary buffer
  logic            rr_wr;
  logic [X_AW-1:0] rr_addr;
  data_t [T-1:0]   rr_data;
  data_t [T-1:0]   x_rd0, x_rd1;
  aux_buffer #(.T(T), .DEPTH(1 << X_AW)) u_aux (
    .clk(clk),
    .we0(rr_wr), .waddr0(rr_addr), .wdata0(rr_data),
    .we1(x_we), .waddr1(x_waddr), .wdata1(x_wdata),
    .raddr0(rctl.x_raddr), .raddr1(mctl.x_raddr), .raddr2(x_raddr),
    .rdata0(x_rd0), .rdata1(x_rd1), .rdata2(x_rdata)
  );

  // RPE input selector and ReLU(K)
  data_t [N-1:0] bvec;
  always_comb
    for (int n = 0; n < N; n++) begin
      bvec[n] = rctl.src_aux ? x_rd0[n] : b_rd[n];
      if (rctl.kv) bvec[n] = relu8(bvec[n]);
    end

  acc_t [M-1:0][N-1:0] racc;
  rpe_engine #(.M(M), .N(N)) u_rpe (
    .clk(clk), .rst_n(rst_n), .mode_pw(rctl.mode_pw), .en(rctl.en), .clr(rctl.clr),
    .dw_load(rctl.dw_load), .dw_shift(rctl.dw_shift),
    .a_par(a_slice), .a_new(a_slice[0]), .w_dw(b_rd), .b_bc(bvec), .acc(racc)
  );

  acc_t ksum;
  k_adder_tree #(.N(N)) u_ktree (
    .clk(clk), .rst_n(rst_n), .en(rctl.en && rctl.kv), .clr(rctl.clr),
    .k(bvec), .sum(ksum)
  );

  // Requantize the RPE results for the auxiliary buffer.
  data_t [M-1:0][T-1:0] dw_q;
  data_t [M-1:0]        row_q;
  data_t                ks_q;
  always_comb begin
    for (int j = 0; j < M; j++) begin
      for (int n = 0; n < N; n++) dw_q[j][n] = requant(racc[j][n], rctl.shift, rctl.act);
      row_q[j] = requant(racc[j][N-1], rctl.shift, rctl.act);
    end
    ks_q = requant(ksum, rctl.shift, ACT_NONE);
  end

  rearrange #(.M(M), .T(T)) u_rearr (
    .clk(clk), .rst_n(rst_n), .cap(rctl.cap), .cap_mode(rctl.cap_mode),
    .cap_row(rctl.cap_row), .trig(rctl.trig), .trig_ks(rctl.trig_ks),
    .wbase(rctl.wbase), .tag(rctl.tag), .dw_vals(dw_q), .row_vals(row_q),
    .ks_val(ks_q), .wr_valid(rr_wr), .wr_addr(rr_addr), .wr_data(rr_data),
    .wr_tag(aux_wr_tag), .busy(rearr_busy)
  );
  assign aux_wr = rr_wr;

  // MAT engine, divisor buffer, post-processing
  acc_t [S-1:0] macc, divs;
  mat_engine #(.S(S), .T(T)) u_mat (
    .clk(clk), .rst_n(rst_n), .en(mctl.en), .clr(mctl.clr), .relu_w(mctl.relu_w),
    .x(x_rd1), .w(c_slice), .acc(macc)
  );

  divisor_buffer #(.S(S)) u_divbuf (
    .clk(clk), .rst_n(rst_n), .we(mctl.out && mctl.to_div), .wdata(macc), .rdata(divs)
  );

  post_proc #(.S(S)) u_post (
    .div_mode(mctl.div_mode), .shift(mctl.shift), .act(mctl.act),
    .acc(macc), .divisor(divs), .y(y)
  );

endmodule
