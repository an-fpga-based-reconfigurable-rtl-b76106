// tmp_ctrl: controller of the time-multiplexed and pipelined (TMP) dataflow.
//
// The RPE engine and the MAT engine of every processing group are driven by
// two independent sequencers, each running one job descriptor at a time
// (rpe_job_t / mat_job_t in evit_pkg). Running a depthwise job on the RPE while
// the MAT runs the following pointwise job, or the KV product of head h+1 on
// the RPE while the MAT runs Q(KV) of head h, is how layers and attention
// phases are fused, as in the paper's schedule figure.
//
// Producer/consumer synchronisation through the auxiliary buffer: every write
// of the re-arrange unit carries the 4-bit tag of the RPE job that made it.
// The controller keeps the tag of the latest writes (cur_tag) and how many
// vectors carry it (prod); a job with wait_en only reads the aux entry at
// offset o from its base once o < prod under its wait_seq, or once a newer
// tag (1..7 steps ahead, modulo 16) has appeared. Until then it stalls.
// Producers must write sequentially from the consumer's base.
//
// RPE sequencing per job (counters i0 innermost .. i3 outermost):
//  OP_DW: i3 tile, i1 kernel row, i0 step in the row. Stride 1 visits taps
//         0..k-1 (load, then k-1 shifts); stride 2 visits the even taps, then
//         the odd taps, each group starting with a load - the paper's
//         "first odd, then even" order in 1-based column numbers. Buffer A is
//         read sequentially, buffer B (weights) at in_base + row*k + tap.
//  OP_PW: i3 pass, i0 chunk. Input at in_base + i3*pstride + i0*cstride from
//         buffer B or the aux buffer, weights at a_base + i0.
//  OP_KV: i3 a-group, i2 b-group, i1 row in the group, i0 token chunk.
//         ReLU(K^T) at in_base + (i3*T + i1)*chunks + i0, V at
//         a_base + i2*chunks + i0.
// At the end of each accumulation the result is captured by re-arrange two
// cycles later. The sequencer does not issue the last cycle of an
// accumulation while re-arrange is draining or a draining capture is in
// flight (an RPE stall).
//
// MAT sequencing: i3 pass, i0 chunk; aux at in_base + i3*pstride + i0*cstride,
// buffer C at c_base + i0. MSA pass 0 gives the divisors, later passes the
// dividends, which are divided and written to the output buffer.
//
// Timing: addresses (*_s0) leave this block in the issue cycle, the engines
// see data and s1 controls one cycle later, captures/results (s2) one more
// cycle later. Job ports are valid/ready; a job is taken when the sequencer
// is free. The descriptors, the tag scheme and the stall rules are this
// design's; the paper describes the schedule, not a controller.
//
// Lint note: aux_wbase is taken from the incoming descriptor when the job is
// accepted, so the latched copy's aux_wbase bits are unused; the 16-bit
// linear offset is wider than the buffer-B address. Both show up as unused
// bits and are harmless.
module tmp_ctrl
  import evit_pkg::*;
#(
  parameter int M = 8,
  parameter int T = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            rpe_job_valid,
  input  rpe_job_t        rpe_job,
  output logic            rpe_job_ready,
  input  logic            mat_job_valid,
  input  mat_job_t        mat_job,
  output logic            mat_job_ready,
  input  logic            rearr_busy,
  input  logic            aux_wr,
  input  logic [3:0]      aux_wr_tag,
  output logic [A_AW-1:0] a_raddr,
  output logic [C_AW-1:0] c_raddr,
  output rpe_ctl_t        rctl,
  output mat_ctl_t        mctl,
  output logic            out_we,
  output logic [O_AW-1:0] out_waddr,
  output logic            rpe_idle,
  output logic            mat_idle,
  output logic            rpe_fire,
  output logic            rpe_stall,
  output logic            mat_fire,
  output logic            mat_stall
);

  // ---------------------------------------------------------------- sync
  logic [3:0]  cur_tag;
  logic [X_AW:0] prod;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_tag <= '0;
      prod    <= '0;
    end else if (aux_wr) begin
      if (aux_wr_tag == cur_tag) prod <= prod + 1'b1;
      else begin
        cur_tag <= aux_wr_tag;
        prod    <= 1;
      end
    end
  end

  function automatic logic sync_ok(input logic [15:0] off, input logic [3:0] seq);
    logic [3:0] d;
    d = cur_tag - seq;
    if (cur_tag == seq) return (off < 16'(prod));
    else                return (d >= 4'd1) && (d <= 4'd7);
  endfunction

  // --------------------------------------------------------- RPE sequencer
  rpe_job_t   rj;
  logic       rbusy;
  logic [7:0] i0, i1, i2, i3;
  logic [A_AW-1:0] acnt;
  logic [X_AW-1:0] wptr;

  logic [7:0] lim0, lim1, lim2;
  logic       e0, e1, e2, e3, r_last, r_first, r_trig, r_multi, r_load, r_stall;
  logic [7:0] tap, half;
  logic [15:0] r_off, b_lin;

  // Pipeline registers of the RPE path.
  logic       s1_en, s1_last, s1_trig, s1_multi, s1_ks;
  cap_e       s1_cmode;
  logic [2:0] s1_row;
  logic [X_AW-1:0] s1_wbase;
  logic [3:0] s1_tag;
  logic [4:0] s1_shift;
  act_e       s1_act;
  logic       s2_cap, s2_multi, s3_cap;

  always_comb begin
    lim0 = (rj.op == OP_DW) ? 8'(rj.k) : rj.chunks;
    lim1 = (rj.op == OP_DW) ? 8'(rj.k) : (rj.op == OP_KV) ? 8'(T) : 8'd1;
    lim2 = (rj.op == OP_KV) ? rj.count2 : 8'd1;
    e0 = (i0 == lim0 - 1'b1);
    e1 = (i1 == lim1 - 1'b1);
    e2 = (i2 == lim2 - 1'b1);
    e3 = (i3 == rj.count - 1'b1);
    r_last  = e0 && ((rj.op == OP_DW) ? e1 : 1'b1);
    r_first = (i0 == 0) && ((rj.op == OP_DW) ? (i1 == 0) : 1'b1);
    r_trig  = r_last && ((rj.op != OP_KV) || e1);
    r_multi = r_trig && (rj.op != OP_PW);
    // Kernel tap of this step and whether it starts with a parallel load.
    half = (8'(rj.k) + 8'd1) >> 1;
    if (rj.stride2) begin
      if (i0 < half) begin tap = i0 << 1;                r_load = (i0 == 0);    end
      else           begin tap = ((i0 - half) << 1) + 1; r_load = (i0 == half); end
    end else begin
      tap = i0; r_load = (i0 == 0);
    end
    r_off = 16'(i3) * 16'(rj.pstride) + 16'(i0) * 16'(rj.cstride);
    unique case (rj.op)
      OP_DW:   begin a_raddr = rj.a_base + A_AW'(acnt);
                     b_lin   = 16'(rj.in_base) + 16'(i1) * 16'(rj.k) + 16'(tap); end
      OP_KV:   begin a_raddr = rj.a_base + A_AW'(16'(i2) * 16'(rj.chunks) + 16'(i0));
                     b_lin   = 16'(rj.in_base) + (16'(i3) * 16'(T) + 16'(i1)) * 16'(rj.chunks) + 16'(i0); end
      default: begin a_raddr = rj.a_base + A_AW'(i0);
                     b_lin   = 16'(rj.in_base) + r_off; end
    endcase
    rctl.b_raddr = B_AW'(b_lin);
    rctl.x_raddr = X_AW'(b_lin);
    r_stall = (r_last && (rearr_busy || (s1_en && s1_last && s1_multi) || (s2_cap && s2_multi)))
            || ((rj.op == OP_PW) && rj.src_aux && rj.wait_en && !sync_ok(r_off, rj.wait_seq));
    rpe_fire  = rbusy && !r_stall;
    rpe_stall = rbusy && r_stall;
  end

  assign rpe_job_ready = !rbusy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rj <= '0; rbusy <= 1'b0;
      i0 <= '0; i1 <= '0; i2 <= '0; i3 <= '0; acnt <= '0; wptr <= '0;
    end else if (!rbusy) begin
      if (rpe_job_valid) begin
        rj <= rpe_job; rbusy <= (rpe_job.count != 0);
        i0 <= '0; i1 <= '0; i2 <= '0; i3 <= '0; acnt <= '0;
        wptr <= rpe_job.aux_wbase;
      end
    end else if (rpe_fire) begin
      acnt <= acnt + 1'b1;
      if (r_trig)
        wptr <= wptr + ((rj.op == OP_DW) ? X_AW'(M) : (rj.op == OP_PW) ? X_AW'(1)
                        : (i2 == 0) ? X_AW'(M + 1) : X_AW'(M));
      if (!e0) i0 <= i0 + 1'b1;
      else begin
        i0 <= '0;
        if (!e1) i1 <= i1 + 1'b1;
        else begin
          i1 <= '0;
          if (!e2) i2 <= i2 + 1'b1;
          else begin
            i2 <= '0;
            if (!e3) i3 <= i3 + 1'b1;
            else begin i3 <= '0; rbusy <= 1'b0; end
          end
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_en <= 1'b0; s1_last <= 1'b0; s1_trig <= 1'b0; s1_multi <= 1'b0; s1_ks <= 1'b0;
      s1_cmode <= CAP_DW; s1_row <= '0; s1_wbase <= '0; s1_tag <= '0; s1_shift <= '0;
      s1_act <= ACT_NONE;
      rctl.en <= 1'b0; rctl.clr <= 1'b0; rctl.mode_pw <= 1'b0; rctl.dw_load <= 1'b0;
      rctl.dw_shift <= 1'b0; rctl.src_aux <= 1'b0; rctl.kv <= 1'b0;
      rctl.cap <= 1'b0; rctl.cap_mode <= CAP_DW; rctl.cap_row <= '0; rctl.trig <= 1'b0;
      rctl.trig_ks <= 1'b0; rctl.wbase <= '0; rctl.tag <= '0; rctl.shift <= '0;
      rctl.act <= ACT_NONE;
      s2_cap <= 1'b0; s2_multi <= 1'b0; s3_cap <= 1'b0;
    end else begin
      // s0 -> s1
      s1_en         <= rpe_fire;
      rctl.en       <= rpe_fire;
      rctl.clr      <= r_first;
      rctl.mode_pw  <= (rj.op != OP_DW);
      rctl.dw_load  <= (rj.op == OP_DW) && r_load;
      rctl.dw_shift <= (rj.op == OP_DW) && !r_load;
      rctl.src_aux  <= (rj.op == OP_PW) && rj.src_aux;
      rctl.kv       <= (rj.op == OP_KV);
      s1_last  <= r_last;
      s1_trig  <= r_trig;
      s1_multi <= r_multi;
      s1_ks    <= (rj.op == OP_KV) && (i2 == 0);
      s1_cmode <= (rj.op == OP_DW) ? CAP_DW : (rj.op == OP_PW) ? CAP_ROW : CAP_KV;
      s1_row   <= i1[2:0];
      s1_wbase <= wptr;
      s1_tag   <= rj.seq;
      s1_shift <= rj.shift;
      s1_act   <= rj.act;
      // s1 -> s2
      rctl.cap      <= s1_en && s1_last;
      rctl.cap_mode <= s1_cmode;
      rctl.cap_row  <= s1_row;
      rctl.trig     <= s1_trig;
      rctl.trig_ks  <= s1_ks;
      rctl.wbase    <= s1_wbase;
      rctl.tag      <= s1_tag;
      rctl.shift    <= s1_shift;
      rctl.act      <= s1_act;
      s2_cap   <= s1_en && s1_last;
      s2_multi <= s1_multi;
      s3_cap   <= s2_cap;
    end
  end

  assign rpe_idle = !rbusy && !s1_en && !s2_cap && !s3_cap && !rearr_busy;

  // --------------------------------------------------------- MAT sequencer
  mat_job_t   mj;
  logic       mbusy;
  logic [7:0] j0, j3;
  logic       m_last, m_e3, m_stall;
  logic [15:0] m_off;

  logic       t1_en, t1_last, t1_msa;
  logic [7:0] t1_pass;
  logic [O_AW-1:0] t1_obase;
  logic [4:0] t1_shift;
  act_e       t1_act;
  logic [7:0] t2_pass;
  logic [O_AW-1:0] t2_obase;
  logic       t2_msa;

  always_comb begin
    m_last  = (j0 == mj.chunks - 1'b1);
    m_e3    = (j3 == mj.count - 1'b1);
    m_off   = 16'(j3) * 16'(mj.pstride) + 16'(j0) * 16'(mj.cstride);
    mctl.x_raddr = mj.in_base + X_AW'(m_off);
    c_raddr = mj.c_base + C_AW'(j0);
    m_stall = mj.wait_en && !sync_ok(m_off, mj.wait_seq);
    mat_fire  = mbusy && !m_stall;
    mat_stall = mbusy && m_stall;
  end

  assign mat_job_ready = !mbusy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mj <= '0; mbusy <= 1'b0; j0 <= '0; j3 <= '0;
    end else if (!mbusy) begin
      if (mat_job_valid) begin
        mj <= mat_job; mbusy <= (mat_job.count != 0); j0 <= '0; j3 <= '0;
      end
    end else if (mat_fire) begin
      if (!m_last) j0 <= j0 + 1'b1;
      else begin
        j0 <= '0;
        if (!m_e3) j3 <= j3 + 1'b1;
        else begin j3 <= '0; mbusy <= 1'b0; end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t1_en <= 1'b0; t1_last <= 1'b0; t1_msa <= 1'b0; t1_pass <= '0; t1_obase <= '0;
      t1_shift <= '0; t1_act <= ACT_NONE; t2_pass <= '0; t2_obase <= '0; t2_msa <= 1'b0;
      mctl.en <= 1'b0; mctl.clr <= 1'b0; mctl.relu_w <= 1'b0;
      mctl.out <= 1'b0; mctl.to_div <= 1'b0; mctl.div_mode <= 1'b0;
      mctl.shift <= '0; mctl.act <= ACT_NONE;
    end else begin
      t1_en    <= mat_fire;
      t1_last  <= m_last;
      t1_msa   <= (mj.op == MAT_MSA);
      t1_pass  <= j3;
      t1_obase <= mj.out_base;
      t1_shift <= mj.shift;
      t1_act   <= mj.act;
      mctl.en     <= mat_fire;
      mctl.clr    <= (j0 == 0);
      mctl.relu_w <= (mj.op == MAT_MSA);
      mctl.out      <= t1_en && t1_last;
      mctl.to_div   <= t1_msa && (t1_pass == 0);
      mctl.div_mode <= t1_msa && (t1_pass != 0);
      mctl.shift    <= t1_shift;
      mctl.act      <= t1_act;
      t2_pass  <= t1_pass;
      t2_obase <= t1_obase;
      t2_msa   <= t1_msa;
    end
  end

  always_comb begin
    out_we    = mctl.out && !mctl.to_div;
    out_waddr = t2_obase + O_AW'(t2_msa ? t2_pass - 8'd1 : t2_pass);
  end

  assign mat_idle = !mbusy && !t1_en && !mctl.out;

endmodule
