// row_decoder: one-hot word-line select used to program one crossbar row.
//
// The tile's row decoder turns a binary row address into a one-hot select of
// the ROWS word lines when `en` is high, and selects nothing otherwise. It is
// purely combinational. The paper names the block (tile floorplan) but does
// not describe it; a plain binary-to-one-hot decoder is this design's choice.
module row_decoder #(
  parameter int unsigned ROWS = 128,
  localparam int unsigned AW  = $clog2(ROWS)
) (
  input  logic            en,
  input  logic [AW-1:0]   addr,
  output logic [ROWS-1:0] sel
);
  always_comb begin
    sel = '0;
    if (en && (32'(addr) < ROWS)) sel[addr] = 1'b1;
  end
endmodule
