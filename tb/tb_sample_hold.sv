// tb_sample_hold: checks reset, masked sampling and holding of the S/H bank.
module tb_sample_hold;
  localparam int W = 6;
  logic clk = 0, rst_n = 0;
  logic [W-1:0] smp;
  real d [W];
  real q [W];
  real exp [W];
  int checks = 0, failures = 0;

  sample_hold #(.W(W)) dut (.clk, .rst_n, .smp, .d, .q);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    smp = '0;
    for (int i = 0; i < W; i++) begin d[i] = 0.3; exp[i] = 0.0; end
    #12 rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      @(negedge clk);
      smp = W'($urandom);
      for (int i = 0; i < W; i++) begin
        d[i] = real'($urandom % 1000) / 2000.0;
        if (smp[i]) exp[i] = d[i];
      end
      @(negedge clk);
      smp = '0;
      for (int i = 0; i < W; i++) d[i] = 0.9;   // must not be taken
      @(negedge clk);
      for (int i = 0; i < W; i++) begin
        checks++;
        if (q[i] != exp[i]) begin
          failures++;
          $display("q[%0d]=%f expected %f", i, q[i], exp[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
