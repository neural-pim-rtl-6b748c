// column_decoder: bitline write mask for programming a crossbar row.
//
// Each 8-bit signed weight occupies a group of 16 adjacent columns (W^P bits
// 0..7, then W^N bits 0..7). The decoder enables the 16 columns of the
// addressed weight group, or all COLS columns when `all` is set, and nothing
// when `en` is low. Combinational. The paper names the block only; the
// group-wise mask is this design's choice, matched to the 16-column weight
// layout the paper does give.
module column_decoder #(
  parameter int unsigned COLS  = 128,
  parameter int unsigned GCOLS = 16,
  localparam int unsigned GROUPS = COLS / GCOLS,
  localparam int unsigned GW     = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic            en,
  input  logic            all,
  input  logic [GW-1:0]   grp,
  output logic [COLS-1:0] mask
);
  always_comb begin
    mask = '0;
    for (int unsigned c = 0; c < COLS; c++)
      mask[c] = en && (all || (c / GCOLS == 32'(grp)));
  end
endmodule
