// mat_unit: one Multipliers-and-Adder-Tree (MAT) lane.
//
// T multipliers form x[t]*w[t] in parallel; an adder tree reduces them and the
// result is added to the accumulator register. Over several cycles this
// computes a dot product along the input-channel dimension, as the paper
// describes for PW convolution. The single-cycle tree is this design's choice.
//
// Timing: en = 1 accumulates at the clock edge, clr = 1 starts from zero.
module mat_unit
  import evit_pkg::*;
#(
  parameter int T = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          clr,
  input  data_t [T-1:0] x,
  input  data_t [T-1:0] w,
  output acc_t          acc
);

  acc_t tree;
  always_comb begin
    tree = '0;
    for (int t = 0; t < T; t++) tree += acc_t'(x[t]) * acc_t'(w[t]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= (clr ? acc_t'(0) : acc) + tree;
  end

endmodule
