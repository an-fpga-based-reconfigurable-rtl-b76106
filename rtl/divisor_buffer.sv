// divisor_buffer: the small buffer that keeps the attention divisors.
//
// In the attention phase the MAT engine first computes, for each of its S
// query rows, the divisor ReLU(Q_i) . ReLU(K)^T_sum. The S divisors are written
// here together (we = 1) and held until the dividends of the same rows come
// out of the MAT engine, when post-processing reads them. One group of S
// entries is this design's size; the paper only calls the buffer small.
// Timing: written at the clock edge, read combinationally.
module divisor_buffer
  import evit_pkg::*;
#(
  parameter int S = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         we,
  input  acc_t [S-1:0] wdata,
  output acc_t [S-1:0] rdata
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  rdata <= '0;
    else if (we) rdata <= wdata;
  end

endmodule
