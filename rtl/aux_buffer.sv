// aux_buffer: auxiliary buffer of one processing group.
//
// Holds T-element int8 vectors between the RPE engine and the MAT engine:
// depthwise outputs waiting for the following pointwise convolution, and the
// Ksum / Z vectors of the attention. It is also the processing group's path
// to and from off-chip memory. One array, DEPTH words of T bytes, with
//  * write port 0 from the re-arrange unit, which has priority,
//  * write port 1 from off-chip memory, taken when port 0 is idle,
//  * read port 0 for the RPE input selector, read port 1 for the MAT
//    broadcast and read port 2 for off-chip memory.
// Reads are registered (data one cycle after the address). The three reads of
// one array are this design's way of giving both engines and the memory side
// concurrent access; an FPGA build would replicate the storage.
module aux_buffer
  import evit_pkg::*;
#(
  parameter int T     = 8,
  parameter int DEPTH = 512,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we0,
  input  logic [AW-1:0] waddr0,
  input  data_t [T-1:0] wdata0,
  input  logic          we1,
  input  logic [AW-1:0] waddr1,
  input  data_t [T-1:0] wdata1,
  input  logic [AW-1:0] raddr0,
  input  logic [AW-1:0] raddr1,
  input  logic [AW-1:0] raddr2,
  output data_t [T-1:0] rdata0,
  output data_t [T-1:0] rdata1,
  output data_t [T-1:0] rdata2
);

  data_t [T-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we0)      mem[waddr0] <= wdata0;
    else if (we1) mem[waddr1] <= wdata1;
    rdata0 <= mem[raddr0];
    rdata1 <= mem[raddr1];
    rdata2 <= mem[raddr2];
  end

endmodule
