// rearrange: re-arrange unit between the RPE engine and the auxiliary buffer.
//
// The RPE produces results in the shape of its array, the MAT engine consumes
// T-element vectors along its input-channel dimension. This unit holds a
// T x T int8 tile (M = N = T) and writes vectors to the auxiliary buffer:
//  * CAP_DW : the whole tile is captured from the M PE lines (row j = output
//             pixel j, N channels). A drain writes rows 0..M-1, one pixel vector
//             per cycle, to consecutive addresses from wbase.
//  * CAP_ROW: one PW result (M output channels of one pixel) is written
//             straight through, one cycle after the capture.
//  * CAP_KV : row cap_row of the tile takes Z[a][b0..b0+M-1] and ks[cap_row]
//             the Ksum of feature a. With trig the drain writes, if trig_ks,
//             the Ksum vector first, then the M columns of the tile, i.e. the
//             columns Z[a0..a0+T-1][b] the MAT engine multiplies with Q.
// A drain starts on the capture with trig and writes one vector per cycle
// while busy = 1; a new capture must not arrive while busy (the controller
// stalls instead). Every write carries the tag given with the capture.
// The paper only names this unit; what it does here is this design's choice.
module rearrange
  import evit_pkg::*;
#(
  parameter int M = 8,
  parameter int T = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cap,
  input  cap_e                 cap_mode,
  input  logic [2:0]           cap_row,
  input  logic                 trig,
  input  logic                 trig_ks,
  input  logic [X_AW-1:0]      wbase,
  input  logic [3:0]           tag,
  input  data_t [M-1:0][T-1:0] dw_vals,
  input  data_t [M-1:0]        row_vals,
  input  data_t                ks_val,
  output logic                 wr_valid,
  output logic [X_AW-1:0]      wr_addr,
  output data_t [T-1:0]        wr_data,
  output logic [3:0]           wr_tag,
  output logic                 busy
);

  data_t [T-1:0][T-1:0] tile;     // tile[row][col]
  data_t [T-1:0]        ks;
  logic                 cols;     // drain columns (KV) instead of rows (DW)
  logic                 dks;      // drain starts with the Ksum vector
  logic [4:0]           dcnt, didx;
  logic [X_AW-1:0]      daddr;
  logic [3:0]           dtag;
  logic                 row_v;
  data_t [T-1:0]        row_d;
  logic [X_AW-1:0]      row_a;
  logic [3:0]           row_t;

  assign busy = (dcnt != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tile <= '0; ks <= '0; cols <= 1'b0; dks <= 1'b0;
      dcnt <= '0; didx <= '0; daddr <= '0; dtag <= '0;
      row_v <= 1'b0; row_d <= '0; row_a <= '0; row_t <= '0;
    end else begin
      row_v <= 1'b0;
      if (dcnt != 0) begin
        dcnt  <= dcnt - 1'b1;
        didx  <= didx + 1'b1;
        daddr <= daddr + 1'b1;
      end
      if (cap) begin
        unique case (cap_mode)
          CAP_DW: begin
            for (int j = 0; j < M; j++) tile[j] <= dw_vals[j];
            if (trig) begin
              cols <= 1'b0; dks <= 1'b0; dcnt <= 5'(M); didx <= '0;
              daddr <= wbase; dtag <= tag;
            end
          end
          CAP_ROW: begin
            row_v <= 1'b1; row_d <= row_vals; row_a <= wbase; row_t <= tag;
          end
          CAP_KV: begin
            tile[cap_row] <= row_vals;
            ks[cap_row]   <= ks_val;
            if (trig) begin
              cols <= 1'b1; dks <= trig_ks; dcnt <= 5'(M) + 5'(trig_ks); didx <= '0;
              daddr <= wbase; dtag <= tag;
            end
          end
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    logic [4:0] c;
    wr_valid = 1'b0;
    wr_addr  = daddr;
    wr_tag   = dtag;
    wr_data  = '0;
    c        = didx - 5'(dks);
    if (row_v) begin
      wr_valid = 1'b1; wr_addr = row_a; wr_tag = row_t; wr_data = row_d;
    end else if (dcnt != 0) begin
      wr_valid = 1'b1;
      if (!cols)                   wr_data = tile[int'(didx) % T];
      else if (dks && didx == 0)   wr_data = ks;
      else for (int a = 0; a < T; a++) wr_data[a] = tile[a][int'(c) % T];
    end
  end

  // A capture while a drain is running would overwrite the tile.
  assert property (@(posedge clk) disable iff (!rst_n) cap |-> !busy)
    else $error("rearrange: capture during drain");

endmodule
