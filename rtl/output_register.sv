// output_register: the PE's output register (OR), an SRAM for NNADC codes.
//
// Holds the 8-bit NNADC code of every weight group of every crossbar: entry
// xbar*GROUPS + grp. The shared NNADCs write up to WL codes per clock, each
// lane with its own enable and index; the PE adder reads all GROUPS codes of
// one crossbar per clock (combinational read). The paper gives the OR's role
// (stores quantized dot products from the NNADCs, SRAM); the organisation is
// this design's choice.
module output_register
  import npim_pkg::*;
#(
  parameter int unsigned XBARS  = 64,
  parameter int unsigned GROUPS = 8,
  parameter int unsigned WL     = 60,
  localparam int unsigned N     = XBARS * GROUPS,
  localparam int unsigned IW    = $clog2(N),
  localparam int unsigned XW    = (XBARS > 1) ? $clog2(XBARS) : 1
) (
  input  logic                                clk,
  input  logic [WL-1:0]                       we,
  input  logic [WL-1:0][IW-1:0]               widx,
  input  logic [WL-1:0][P_OUT-1:0]            wdata,
  input  logic [XW-1:0]                       raddr,
  output logic [GROUPS-1:0][P_OUT-1:0]        rdata
);
  logic [P_OUT-1:0] mem [N];

  always_ff @(posedge clk) begin
    for (int unsigned l = 0; l < WL; l++)
      if (we[l]) mem[widx[l]] <= wdata[l];
  end

  always_comb begin
    for (int unsigned g = 0; g < GROUPS; g++)
      rdata[g] = mem[32'(raddr) * GROUPS + g];
  end
endmodule
