// sdp_ram: simple dual-port RAM, one write port and one registered read port.
//
// Used for the global buffers A and C, the per-group buffer B and the output
// buffer. A write at an address takes effect at the clock edge; a read
// presents mem[raddr] one cycle after raddr is applied (block-RAM timing).
// Reading an address being written in the same cycle returns the old word.
// Contents are not reset; only what has been written should be read.
module sdp_ram #(
  parameter int W     = 64,
  parameter int DEPTH = 512,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
