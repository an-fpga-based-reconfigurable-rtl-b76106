// mat_engine: S MAT lanes sharing one broadcast input vector.
//
// The T-vector x (read from the auxiliary buffer) goes to all S lanes; lane s
// uses its own T weights w[s] (split from buffer C). In the attention phase
// the weights are rows of Q and relu_w applies ReLU(Q) to them on the way in.
// Broadcast and split follow the paper; ReLU placement is this design's.
//
// Timing: as mat_unit, acc[s] updates at the edge of an enabled cycle.
module mat_engine
  import evit_pkg::*;
#(
  parameter int S = 8,
  parameter int T = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 clr,
  input  logic                 relu_w,
  input  data_t [T-1:0]        x,
  input  data_t [S-1:0][T-1:0] w,
  output acc_t  [S-1:0]        acc
);

  for (genvar s = 0; s < S; s++) begin : g_mat
    data_t [T-1:0] w_op;
    always_comb
      for (int t = 0; t < T; t++) w_op[t] = relu_w ? relu8(w[s][t]) : w[s][t];
    mat_unit #(.T(T)) u_mat (
      .clk(clk), .rst_n(rst_n), .en(en), .clr(clr), .x(x), .w(w_op), .acc(acc[s])
    );
  end

endmodule
