// tb_nnadc: checks the NNADC transfer function for all three input ranges,
// rounding, clamping at both ends and the one-clock latency.
module tb_nnadc;
  import npim_pkg::*;
  import tb_npim_model::*;
  localparam int L = 4;
  logic clk = 0, rst_n = 0, en, valid;
  adc_range_e range;
  real vp [L];
  real vn [L];
  logic [7:0] code [L];
  int exp [L];
  int checks = 0, failures = 0;

  nnadc #(.LANES(L)) dut (.clk, .rst_n, .en, .range, .vp, .vn, .valid, .code);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; range = RANGE_HALF;
    for (int l = 0; l < L; l++) begin vp[l] = 0.0; vn[l] = 0.0; end
    #12 rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int unsigned r;
      @(negedge clk);
      r = $urandom % 3;
      range = adc_range_e'(r);
      en = 1;
      for (int l = 0; l < L; l++) begin
        vp[l] = 0.25 + real'($urandom % 10000) / 10000.0 * 0.7;
        vn[l] = 0.25 + real'($urandom % 10000) / 10000.0 * 0.1;
        if (t == 0 && l == 0) begin vp[l] = 0.2; vn[l] = 0.3; end   // negative
        if (t == 0 && l == 1) begin vp[l] = 0.95; vn[l] = 0.25; end // above range
        exp[l] = m_adc(vp[l] - vn[l], r);
      end
      @(posedge clk); #1;
      en = 0;
      checks++;
      if (!valid) begin failures++; $display("valid missing"); end
      for (int l = 0; l < L; l++) begin
        checks++;
        if (int'(code[l]) != exp[l]) begin
          failures++;
          $display("t%0d lane%0d range%0d v=%f code=%0d expected %0d", t, l, r, vp[l] - vn[l], code[l], exp[l]);
        end
      end
      @(posedge clk); #1;
      checks++;
      if (valid) begin failures++; $display("valid stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
