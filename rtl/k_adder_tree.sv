// k_adder_tree: row-wise summation of ReLU(K^T) for the linear attention.
//
// While the RPE multiplies a broadcast ReLU(K^T) vector (N tokens of one key
// feature) with V, this unit adds the same N values with an adder tree and
// accumulates across token chunks, giving ReLU(K)^T_sum for that feature,
// the vector from which the attention divisors are made. The paper gives the
// function; the tree plus accumulator register is this design's realisation.
//
// Timing: en = 1 adds the vector at the clock edge, clr = 1 restarts the sum.
module k_adder_tree
  import evit_pkg::*;
#(
  parameter int N = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          clr,
  input  data_t [N-1:0] k,
  output acc_t          sum
);

  acc_t tree;
  always_comb begin
    tree = '0;
    for (int n = 0; n < N; n++) tree += acc_t'(k[n]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  sum <= '0;
    else if (en) sum <= (clr ? acc_t'(0) : sum) + tree;
  end

endmodule
