// tb_post_proc: requantization with each activation and the attention
// division, on random inputs, against a reference written here (Hardswish
// in Q4.4: y*clamp(y+48,0,96)/96).
`timescale 1ns/1ps
module tb_post_proc;
  import evit_pkg::*;
  localparam int S = 8;
  int checks = 0, failures = 0;
  logic div_mode; logic [4:0] shift; act_e act;
  acc_t [S-1:0] acc, divisor; data_t [S-1:0] y;
  post_proc #(.S(S)) dut (.*);
  function automatic int m_sat(input longint v);
    return (v > 127) ? 127 : (v < -128) ? -128 : int'(v);
  endfunction
  function automatic int ref1(input longint a, input longint d, input int sh, input int ac, input bit dm);
    int q; longint r;
    if (dm) return (d == 0) ? 0 : m_sat((a <<< sh) / d);
    q = m_sat(a >>> sh);
    if (ac == 1 && q < 0) q = 0;
    if (ac == 2) begin r = q + 48; if (r < 0) r = 0; if (r > 96) r = 96; q = m_sat((longint'(q) * r) / 96); end
    return q;
  endfunction
  initial begin
    for (int it = 0; it < 400; it++) begin
      div_mode = (it % 4 == 3); shift = 5'($urandom_range(0, 8)); act = act_e'(it % 3);
      foreach (acc[s]) begin
        acc[s] = acc_t'(int'($urandom_range(0, 8000)) - 4000);
        divisor[s] = (s == 0) ? '0 : acc_t'($urandom_range(0, 600));
      end
      #1;
      foreach (y[s]) begin
        checks++;
        if (int'(y[s]) != ref1(acc[s], divisor[s], shift, int'(act), div_mode)) begin
          failures++;
          if (failures < 10) $display("s%0d dm%0d act%0d sh%0d acc %0d div %0d got %0d exp %0d", s, div_mode, act, shift, acc[s], divisor[s], y[s], ref1(acc[s], divisor[s], shift, int'(act), div_mode));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
