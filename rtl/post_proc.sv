// post_proc: post-processing of the S MAT results of a processing group.
//
// Two operations, chosen per result:
//  * div_mode = 0: requantize each 32-bit accumulator to int8 (arithmetic right
//    shift by `shift`, saturation) and apply the activation (none, ReLU or
//    Hardswish in Q4.4), i.e. the end of a convolution layer.
//  * div_mode = 1: the division of the linear attention. Each dividend
//    ReLU(Q_i)(sum ReLU(K_j)^T V_j) is scaled by 2^shift and divided by the
//    divisor of the same row, truncating toward zero, then saturated to int8.
//    A zero divisor gives 0.
// The dividers in this unit follow the paper; the requantization, the
// activation and the scaling are this design's choices. Purely combinational.
module post_proc
  import evit_pkg::*;
#(
  parameter int S = 8
) (
  input  logic          div_mode,
  input  logic [4:0]    shift,
  input  act_e          act,
  input  acc_t  [S-1:0] acc,
  input  acc_t  [S-1:0] divisor,
  output data_t [S-1:0] y
);

  always_comb begin
    for (int s = 0; s < S; s++) begin
      logic signed [47:0] num, q;
      num = 48'(acc[s]) <<< shift;
      q   = (divisor[s] == 0) ? 48'sd0 : num / 48'(divisor[s]);
      y[s] = div_mode ? sat8(q) : requant(acc[s], shift, act);
    end
  end

endmodule
