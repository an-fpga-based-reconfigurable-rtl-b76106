// rpe_line: one PE line of the reconfigurable processing element (RPE).
//
// N multiply-accumulate units. Each MAC n has a multiplier, an adder and a
// register; a 2-way selection in front of the adder decides what the product
// is added to:
//  * DW mode (mode_pw = 0), self-accumulation: MAC n adds its product to its
//    own register, so the line holds N independent sums (one per channel).
//  * PW mode (mode_pw = 1), down-forward accumulation: the products run down
//    the line, MAC n adding MAC n-1's partial sum, and the last MAC adds the
//    line total to its register. acc[N-1] is then the dot product of a and w
//    accumulated over all enabled cycles.
// The two modes and the chain follow the paper's PE-line figure; the chain
// being combinational within one cycle is this design's choice.
//
// Timing: with en = 1 the registers update at the clock edge; clr = 1 makes the
// update start from zero instead of the register (first cycle of a window or
// of an input-channel sweep). acc is the register output.
module rpe_line
  import evit_pkg::*;
#(
  parameter int N = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              mode_pw,
  input  logic              en,
  input  logic              clr,
  input  data_t [N-1:0]     a,
  input  data_t [N-1:0]     w,
  output acc_t  [N-1:0]     acc
);

  acc_t [N-1:0] prod;
  acc_t [N-1:0] chain;   // PW: running sum down the line

  always_comb begin
    acc_t run;
    run = '0;
    for (int n = 0; n < N; n++) begin
      prod[n]  = acc_t'(a[n]) * acc_t'(w[n]);
      run      = run + prod[n];
      chain[n] = run;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
    end else if (en) begin
      for (int n = 0; n < N; n++) begin
        if (!mode_pw)
          acc[n] <= (clr ? acc_t'(0) : acc[n]) + prod[n];
        else if (n == N-1)
          acc[n] <= (clr ? acc_t'(0) : acc[n]) + chain[N-1];
      end
    end
  end

endmodule
