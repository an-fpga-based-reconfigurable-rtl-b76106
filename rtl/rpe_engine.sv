// rpe_engine: the reconfigurable processing element array, M PE lines of N MACs.
//
// DW mode (depthwise convolution, self-accumulation). Each of the N MAC rows
// handles one channel. A shift register of M pixel slots per channel feeds
// line j with pixel slot j. On dw_load the M slots are loaded in parallel from
// a_par (line j <- a_par[j]); on dw_shift every slot moves one line down
// (slot 0, pixel a_1, is dropped) and a_new enters slot M-1. The weight of
// the current kernel tap, one per channel (w_dw[n]), is broadcast to all M
// lines. After the k*k taps of a window the M lines hold the outputs of M
// neighbouring output pixels for N channels. The slot values are used in the
// same cycle they are loaded or shifted.
//
// PW mode (pointwise conv / generic conv / MatMul, down-forward accumulation).
// The N-vector b_bc is broadcast to all M lines, line j multiplies it with its
// own weights a_par[j] and accumulates the line sum in acc[j][N-1].
//
// Which operand comes from which buffer and the load/shift schedule follow
// the paper; the timing (operands used in the cycle they are presented,
// result in acc one edge later) is this design's.
module rpe_engine
  import evit_pkg::*;
#(
  parameter int M = 8,
  parameter int N = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 mode_pw,
  input  logic                 en,
  input  logic                 clr,
  input  logic                 dw_load,
  input  logic                 dw_shift,
  input  data_t [M-1:0][N-1:0] a_par,
  input  data_t [N-1:0]        a_new,
  input  data_t [N-1:0]        w_dw,
  input  data_t [N-1:0]        b_bc,
  output acc_t  [M-1:0][N-1:0] acc
);

  data_t [M-1:0][N-1:0] sr, sr_nxt;

  always_comb begin
    sr_nxt = sr;
    if (dw_load) begin
      sr_nxt = a_par;
    end else if (dw_shift) begin
      for (int j = 0; j < M-1; j++) sr_nxt[j] = sr[j+1];
      sr_nxt[M-1] = a_new;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                           sr <= '0;
    else if (en && !mode_pw && (dw_load || dw_shift)) sr <= sr_nxt;
  end

  for (genvar j = 0; j < M; j++) begin : g_line
    data_t [N-1:0] a_op, w_op;
    always_comb begin
      a_op = mode_pw ? b_bc     : sr_nxt[j];
      w_op = mode_pw ? a_par[j] : w_dw;
    end
    rpe_line #(.N(N)) u_line (
      .clk(clk), .rst_n(rst_n), .mode_pw(mode_pw), .en(en), .clr(clr),
      .a(a_op), .w(w_op), .acc(acc[j])
    );
  end

endmodule
