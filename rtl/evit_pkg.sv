// evit_pkg: types, constants and arithmetic helpers shared by the EfficientViT
// accelerator. Data are signed 8-bit fixed point (FIX8) as in the paper;
// accumulators are 32 bits (this design's choice, wide enough for any sum of
// 8x8 products the loop counts allow). The buffer depths, the job descriptor
// layout and the requantization/Hardswish format are this design's own.
package evit_pkg;

  localparam int DATA_W = 8;
  localparam int ACC_W  = 32;

  // Buffer address widths (depths 256/512 are chosen to fit the paper's
  // 160-BRAM budget, see README).
  localparam int A_AW   = 8;   // buffer A, 256 words
  localparam int B_AW   = 9;   // buffer B, 512 words per PG
  localparam int C_AW   = 8;   // buffer C, 256 words
  localparam int X_AW   = 9;   // auxiliary buffer, 512 words per PG
  localparam int O_AW   = 8;   // output buffer, 256 words

  // Hardswish fixed-point format: value = int8 / 2^HS_FRAC.
  localparam int HS_FRAC = 4;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  typedef enum logic [1:0] {ACT_NONE = 2'd0, ACT_RELU = 2'd1, ACT_HSWISH = 2'd2} act_e;
  typedef enum logic [1:0] {OP_DW = 2'd0, OP_PW = 2'd1, OP_KV = 2'd2} rpe_op_e;
  typedef enum logic       {MAT_PW = 1'b0, MAT_MSA = 1'b1} mat_op_e;
  // How the re-arrange unit captures RPE results.
  typedef enum logic [1:0] {CAP_DW = 2'd0, CAP_ROW = 2'd1, CAP_KV = 2'd2} cap_e;

  // Job for the RPE engine sequencer.
  //  OP_DW : count tiles of M output pixels x N channels, k x k kernel.
  //  OP_PW : count passes of chunks cycles; input n-vector from buffer B or
  //          the auxiliary buffer at in_base + pass*pstride + chunk*cstride,
  //          weights from buffer A at a_base + chunk.
  //  OP_KV : Z = ReLU(K^T) V and Ksum for one head: count a-groups of T rows,
  //          count2 b-groups of M columns, chunks token chunks of N.
  typedef struct packed {
    rpe_op_e      op;
    logic         src_aux;    // OP_PW: broadcast vector read from aux buffer
    logic [2:0]   k;          // OP_DW kernel size
    logic         stride2;    // OP_DW stride 2
    logic [7:0]   count;
    logic [7:0]   count2;
    logic [7:0]   chunks;
    logic [A_AW-1:0] a_base;
    logic [X_AW-1:0] in_base; // buffer B or aux base
    logic [X_AW-1:0] pstride;
    logic [X_AW-1:0] cstride;
    logic [X_AW-1:0] aux_wbase;
    logic [4:0]   shift;
    act_e         act;
    logic [3:0]   seq;        // tag carried by this job's aux writes
    logic         wait_en;    // wait for aux entries tagged wait_seq
    logic [3:0]   wait_seq;
  } rpe_job_t;

  // Job for the MAT engine sequencer.
  //  MAT_PW : count passes (pixels) of chunks cycles; input T-vector from aux at
  //           in_base + pass*pstride + chunk*cstride; weights C[c_base+chunk];
  //           result requantized to out_base + pass.
  //  MAT_MSA: pass 0 produces divisors (Q . Ksum) into the divisor buffer,
  //           passes 1..count-1 produce dividends (Q . Z column) that are
  //           divided and written to out_base + pass - 1.
  typedef struct packed {
    mat_op_e      op;
    logic [7:0]   count;
    logic [7:0]   chunks;
    logic [X_AW-1:0] in_base;
    logic [X_AW-1:0] pstride;
    logic [X_AW-1:0] cstride;
    logic [C_AW-1:0] c_base;
    logic [O_AW-1:0] out_base;
    logic [4:0]   shift;
    act_e         act;
    logic         wait_en;
    logic [3:0]   wait_seq;
  } mat_job_t;

  // Controls from the sequencers to every PG. *_s0 are read addresses issued
  // this cycle; *_s1 apply to the cycle in which the read data arrive;
  // *_s2 apply one cycle later, when the accumulators hold the result.
  typedef struct packed {
    logic [B_AW-1:0] b_raddr;    // buffer B read (s0)
    logic [X_AW-1:0] x_raddr;    // aux read for the RPE input mux (s0)
    logic         en;            // s1: MAC enable
    logic         clr;           // s1: first cycle of an accumulation
    logic         mode_pw;       // s1: PW (or KV) mode
    logic         dw_load;       // s1
    logic         dw_shift;      // s1
    logic         src_aux;       // s1: RPE input from aux buffer
    logic         kv;            // s1: ReLU on the input and K-adder-tree on
    logic         cap;           // s2: capture into re-arrange
    cap_e         cap_mode;      // s2
    logic [2:0]   cap_row;       // s2: KV row within the T-row group
    logic         trig;          // s2: start a drain after this capture
    logic         trig_ks;       // s2: drain emits the Ksum vector first
    logic [X_AW-1:0] wbase;      // s2: first aux address of the drain
    logic [3:0]   tag;           // s2: sequence tag of the drain
    logic [4:0]   shift;         // s2
    act_e         act;           // s2
  } rpe_ctl_t;

  typedef struct packed {
    logic [X_AW-1:0] x_raddr;    // aux read for the MAT broadcast (s0)
    logic         en;            // s1
    logic         clr;           // s1
    logic         relu_w;        // s1: ReLU(Q)
    logic         out;           // s2: result valid for post-processing
    logic         to_div;        // s2: result is a divisor
    logic         div_mode;      // s2: divide by the stored divisors
    logic [4:0]   shift;         // s2
    act_e         act;           // s2
  } mat_ctl_t;

  function automatic data_t sat8(input logic signed [47:0] x);
    if (x > 48'sd127)       return data_t'(8'sd127);
    else if (x < -48'sd128) return data_t'(-8'sd128);
    else                    return data_t'(x[7:0]);
  endfunction

  function automatic data_t relu8(input data_t x);
    return (x < 0) ? data_t'(0) : x;
  endfunction

  // Arithmetic right shift, saturation to int8, then the activation.
  // Hardswish: y * clamp(y + 3, 0, 6) / 6 with y in Q(8-HS_FRAC).HS_FRAC.
  function automatic data_t requant(input acc_t x, input logic [4:0] sh, input act_e act);
    logic signed [47:0] y, r6, p;
    data_t q;
    y = 48'(x) >>> sh;
    q = sat8(y);
    case (act)
      ACT_RELU:   return relu8(q);
      ACT_HSWISH: begin
        r6 = 48'(q) + 48'sd3 * (48'sd1 <<< HS_FRAC);
        if (r6 < 0) r6 = 0;
        if (r6 > 48'sd6 * (48'sd1 <<< HS_FRAC)) r6 = 48'sd6 * (48'sd1 <<< HS_FRAC);
        p = (48'(q) * r6) / (48'sd6 * (48'sd1 <<< HS_FRAC));
        return sat8(p);
      end
      default:    return q;
    endcase
  endfunction

endpackage
