// tb_rram_crossbar: programs a full-size 128x128 crossbar row by row (with
// a partial column-masked rewrite) and checks every bitline voltage against
// an independently computed dot product for random 4-bit DAC codes.
module tb_rram_crossbar;
  import tb_npim_model::*;
  localparam int R = 128, C = 128, D = 4;

  logic               clk = 0;
  logic [R-1:0]       row_sel;
  logic [C-1:0]       col_mask, data;
  logic [R-1:0][D-1:0] code;
  real                bl [C];
  logic [C-1:0]       ref_cell [R];
  int checks = 0, failures = 0;

  rram_crossbar #(.ROWS(R), .COLS(C), .D(D)) dut (
    .clk, .prog_row_sel(row_sel), .prog_col_mask(col_mask), .prog_data(data),
    .wl_code(code), .bl_v(bl)
  );

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    #1;
    for (int c = 0; c < C; c++) begin
      int unsigned acc;
      real e;
      acc = 0;
      for (int r = 0; r < R; r++) if (ref_cell[r][c]) acc += code[r];
      e = m_bl(acc, R, D);
      checks++;
      if (bl[c] - e > 1e-9 || e - bl[c] > 1e-9) begin
        failures++;
        if (failures < 10) $display("bl[%0d]=%f expected %f", c, bl[c], e);
      end
    end
  endtask

  initial begin
    row_sel = '0; col_mask = '0; data = '0; code = '0;
    // program every row with random bits
    for (int r = 0; r < R; r++) begin
      @(negedge clk);
      row_sel = '0; row_sel[r] = 1'b1; col_mask = '1;
      data = {$urandom, $urandom, $urandom, $urandom};
      ref_cell[r] = data;
    end
    // rewrite weight group 3 of row 5 only
    @(negedge clk);
    row_sel = '0; row_sel[5] = 1'b1; col_mask = '0; col_mask[48 +: 16] = '1;
    data = {$urandom, $urandom, $urandom, $urandom};
    ref_cell[5][48 +: 16] = data[48 +: 16];
    @(negedge clk);
    row_sel = '0; col_mask = '0;
    for (int t = 0; t < 6; t++) begin
      for (int r = 0; r < R; r++) code[r] = D'($urandom);
      if (t == 0) code = '1;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
