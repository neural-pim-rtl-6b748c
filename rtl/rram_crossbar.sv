// rram_crossbar: behavioural model of one RRAM VMM crossbar with its DACs.
//
// Not synthesizable logic: this models an analog array. ROWS x COLS cells of
// 1-bit conductance (0 = high resistance, 1 = low) hold the weight bits. Each
// word line is driven by a D-bit DAC with code wl_code[r]; by Ohm's and
// Kirchhoff's laws bitline c carries sum_r code_r * g[r][c]. The model turns
// that into a bitline voltage normalised to the signal range [0, V_FS]:
//     bl_v[c] = V_FS * sum_r code_r * g[r][c] / (ROWS * (2^D - 1)).
// The bitlines are combinational (the analog array settles within an input
// cycle); a sample_hold after the array captures them.
//
// Programming: on a clock edge with prog_row_sel[r] and prog_col_mask[c] set,
// cell [r][c] takes prog_data[c] (one-hot rows from row_decoder, column mask
// from column_decoder). Cells are written once before inference.
//
// From the paper: 128x128 array, 1-bit cells, 4-bit DACs, bit-sliced inputs.
// The normalisation to [0, 0.5 V] and the ideal (noise-free) DAC and cells
// are this model's choice.
module rram_crossbar
  import npim_pkg::*;
#(
  parameter int unsigned ROWS = 128,
  parameter int unsigned COLS = 128,
  parameter int unsigned D    = 4
) (
  input  logic                   clk,
  input  logic [ROWS-1:0]        prog_row_sel,
  input  logic [COLS-1:0]        prog_col_mask,
  input  logic [COLS-1:0]        prog_data,
  input  logic [ROWS-1:0][D-1:0] wl_code,
  output real                    bl_v [COLS]
);
  localparam real DEN = real'(ROWS) * real'((1 << D) - 1);

  logic [COLS-1:0] gcell [ROWS];

  always_ff @(posedge clk) begin
    for (int unsigned r = 0; r < ROWS; r++)
      if (prog_row_sel[r])
        gcell[r] <= (gcell[r] & ~prog_col_mask) | (prog_data & prog_col_mask);
  end

  always_comb begin
    for (int unsigned c = 0; c < COLS; c++) begin
      int unsigned acc;
      acc = 0;
      for (int unsigned r = 0; r < ROWS; r++)
        if (gcell[r][c]) acc += 32'(wl_code[r]);
      bl_v[c] = V_FS * real'(acc) / DEN;
    end
  end
endmodule
