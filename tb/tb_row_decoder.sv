// tb_row_decoder: exhaustive check of the one-hot row decoder.
module tb_row_decoder;
  logic [6:0]   addr;
  logic         en;
  logic [127:0] sel;
  int checks = 0, failures = 0;

  row_decoder #(.ROWS(128)) dut (.en, .addr, .sel);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < 128; a++) begin
        logic [127:0] exp;
        en = e[0]; addr = 7'(a);
        #1;
        exp = '0;
        if (e == 1) exp[a] = 1'b1;
        checks++;
        if (sel !== exp) begin
          failures++;
          $display("row_decoder: en=%0d addr=%0d sel=%h", e, a, sel);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
