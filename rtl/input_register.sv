// input_register: the PE's input register (IR), an SRAM feeding the DACs.
//
// Holds one 8-bit input per word line of every crossbar of the PE: byte
// xbar*ROWS + row is the input of word line `row` of crossbar `xbar`. It is
// filled over the tile bus one BUS_BYTES-wide word per clock (byte k of a
// word at bits 8k+7:8k) while the PE is idle, and read as bit slices: for
// input cycle `slice` every word line receives bits slice*D .. slice*D+D-1 of
// its input, LSB slice first, as its DAC code. Writes take effect at the
// clock edge; the slice read is combinational. Because all word lines of all
// crossbars are driven at once, the storage is a register file (every byte
// has its own read path), not an addressed SRAM array.
//
// The paper gives the IR's role (inputs sent to the DACs, shared by all
// crossbars of a PE, SRAM) and the bit-slice streaming; the size (one byte
// per word line of all 64 crossbars, 8 KiB) and the word layout are this
// design's choices.
module input_register
  import npim_pkg::*;
#(
  parameter int unsigned XBARS = 64,
  parameter int unsigned ROWS  = 128,
  parameter int unsigned D     = 4,
  localparam int unsigned NSLICE = (P_IN + D - 1) / D,
  localparam int unsigned SW     = (NSLICE > 1) ? $clog2(NSLICE) : 1,
  localparam int unsigned BYTES  = XBARS * ROWS,
  localparam int unsigned WORDS  = BYTES / BUS_BYTES,
  localparam int unsigned AW     = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic                              clk,
  input  logic                              we,
  input  logic [AW-1:0]                     waddr,
  input  logic [BUS_W-1:0]                  wdata,
  input  logic [SW-1:0]                     slice,
  output logic [XBARS-1:0][ROWS-1:0][D-1:0] wl_code
);
  // a register file rather than an addressed memory: every word line reads
  // its own byte in parallel
  logic [WORDS-1:0][BUS_BYTES-1:0][P_IN-1:0] regs;

  always_ff @(posedge clk) begin
    if (we) regs[waddr] <= wdata;
  end

  for (genvar x = 0; x < XBARS; x++) begin : g_x
    for (genvar r = 0; r < ROWS; r++) begin : g_r
      localparam int unsigned BI = x * ROWS + r;
      wire [P_IN-1:0] in_byte = regs[BI / BUS_BYTES][BI % BUS_BYTES];
      wire [P_IN+D-1:0] padded = {{D{1'b0}}, in_byte};
      assign wl_code[x][r] = padded[32'(slice) * D +: D];
    end
  end
endmodule
