// tb_column_decoder: checks the 16-column group masks, the all-columns
// mode and the enable of the column decoder.
module tb_column_decoder;
  logic         en, all;
  logic [2:0]   grp;
  logic [127:0] mask;
  int checks = 0, failures = 0;

  column_decoder #(.COLS(128), .GCOLS(16)) dut (.en, .all, .grp, .mask);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < 2; a++)
        for (int g = 0; g < 8; g++) begin
          logic [127:0] exp;
          en = e[0]; all = a[0]; grp = 3'(g);
          #1;
          exp = '0;
          if (e == 1) begin
            if (a == 1) exp = '1;
            else exp[16*g +: 16] = 16'hffff;
          end
          checks++;
          if (mask !== exp) begin
            failures++;
            $display("column_decoder: en=%0d all=%0d grp=%0d mask=%h", e, a, g, mask);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
