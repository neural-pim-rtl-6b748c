// global_buffer: the tile's eDRAM buffer holding layer inputs and outputs.
//
// WORDS words of BUS_W bits with one read port and one write port, so that
// the reads of pipeline stage 1 (copying a window's inputs into the IRs)
// never collide with the writes of stage 2 (storing activations), as the
// paper requires. Read data appears one clock after re (registered); a
// write takes effect at the clock edge. Written as an array; a real chip
// would use an eDRAM macro. The size (64 KiB, as in ISAAC's tile) and the
// word width are this design's choices; the paper sizes the buffer only
// "correspondingly".
module global_buffer
  import npim_pkg::*;
#(
  parameter int unsigned WORDS = 8192,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic             clk,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [BUS_W-1:0] rdata,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [BUS_W-1:0] wdata
);
  logic [BUS_W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
