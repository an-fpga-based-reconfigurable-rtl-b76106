// tb_tmp_ctrl: checks the sequences the controller issues.
//  * 3x3 DW stride 1 and stride 2: buffer-B tap order and load/shift flags per
//    kernel row (stride 1: taps 0,1,2 = load, shift, shift; stride 2: taps
//    0,2,1 = load, shift, load), sequential buffer-A addresses, 9 cycles per
//    tile, one capture with trig.
//  * RPE stall: while re-arrange is busy the last cycle of a tile is held.
//  * MAT wait: a MAT job waiting on tag 6 issues nothing until aux writes with
//    that tag arrive and never reads an entry not yet written; it then
//    issues one output write per pass.
`timescale 1ns/1ps
module tb_tmp_ctrl;
  import evit_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rpe_job_valid = 0, mat_job_valid = 0, rpe_job_ready, mat_job_ready;
  rpe_job_t rpe_job = '0; mat_job_t mat_job = '0;
  logic rearr_busy = 0, aux_wr = 0; logic [3:0] aux_wr_tag = '0;
  logic [A_AW-1:0] a_raddr; logic [C_AW-1:0] c_raddr;
  rpe_ctl_t rctl; mat_ctl_t mctl;
  logic out_we; logic [O_AW-1:0] out_waddr;
  logic rpe_idle, mat_idle, rpe_fire, rpe_stall, mat_fire, mat_stall;
  tmp_ctrl #(.M(8), .T(8)) dut (.*);

  task automatic chk(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  int taps[$], loads[$], aaddr[$];
  int ncap = 0, ntrig = 0, nout = 0, prod = 0, maxoff = -1;
  logic fire_q; int tap_q;
  always @(posedge clk) if (rst_n) begin
    if (rpe_fire) begin taps.push_back(int'(rctl.b_raddr) - 40); aaddr.push_back(int'(a_raddr)); end
    if (rctl.en) loads.push_back(int'(rctl.dw_load));
    if (rctl.en) chk(rctl.dw_load != rctl.dw_shift, "load xor shift");
    if (rctl.cap) begin ncap++; ntrig += int'(rctl.trig); end
    if (mat_fire) begin
      int off; off = int'(mctl.x_raddr) - 10;
      chk(off < prod, "MAT read before entry written");
    end
    if (out_we) nout++;
    if (aux_wr && aux_wr_tag == 6) prod++;
  end

  task automatic dw(input bit s2);
    int et [9]; int el [9];
    taps.delete(); loads.delete(); aaddr.delete(); ncap = 0; ntrig = 0;
    rpe_job = '0; rpe_job.op = OP_DW; rpe_job.k = 3; rpe_job.stride2 = s2; rpe_job.count = 1;
    rpe_job.a_base = 20; rpe_job.in_base = 40; rpe_job.seq = 1;
    @(negedge clk); rpe_job_valid = 1; @(negedge clk); rpe_job_valid = 0;
    repeat (15) @(negedge clk);
    for (int r = 0; r < 3; r++) begin
      et[r*3+0] = r*3 + 0; el[r*3+0] = 1;
      et[r*3+1] = r*3 + (s2 ? 2 : 1); el[r*3+1] = 0;
      et[r*3+2] = r*3 + (s2 ? 1 : 2); el[r*3+2] = s2;
    end
    chk(taps.size() == 9, "9 cycles per 3x3 tile");
    for (int i = 0; i < 9 && i < taps.size(); i++) begin
      chk(taps[i] == et[i], $sformatf("s%0d tap %0d: %0d vs %0d", s2, i, taps[i], et[i]));
      chk(loads[i] == el[i], $sformatf("s%0d load flag %0d", s2, i));
      chk(aaddr[i] == 20 + i, "sequential A address");
    end
    chk(ncap == 1 && ntrig == 1, "one capture with trig");
  endtask

  int t0, stalls;
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    dw(0);
    dw(1);
    // RPE stall while re-arrange is busy
    taps.delete(); stalls = 0;
    rearr_busy = 1;
    rpe_job = '0; rpe_job.op = OP_DW; rpe_job.k = 3; rpe_job.count = 1; rpe_job.in_base = 40;
    @(negedge clk); rpe_job_valid = 1; @(negedge clk); rpe_job_valid = 0;
    repeat (20) begin @(negedge clk); stalls += int'(rpe_stall); end
    chk(taps.size() == 8, "held before the last tap");
    chk(stalls > 0, "stall reported");
    rearr_busy = 0;
    repeat (5) @(negedge clk);
    chk(taps.size() == 9, "finished after busy drops");
    // MAT wait on tag 6
    nout = 0;
    mat_job = '0; mat_job.op = MAT_PW; mat_job.count = 4; mat_job.chunks = 2; mat_job.in_base = 10;
    mat_job.pstride = 2; mat_job.cstride = 1; mat_job.wait_en = 1; mat_job.wait_seq = 6;
    @(negedge clk); mat_job_valid = 1; @(negedge clk); mat_job_valid = 0;
    repeat (10) @(negedge clk);
    chk(mat_stall && !mat_idle, "MAT waits for tag 6");
    for (int i = 0; i < 8; i++) begin
      @(negedge clk); aux_wr = 1; aux_wr_tag = 6;
      @(negedge clk); aux_wr = 0;
      repeat (2) @(negedge clk);
    end
    repeat (10) @(negedge clk);
    chk(mat_idle, "MAT done");
    chk(nout == 4, "one output per pass");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
