// tb_nnsa: drives the NNS+A through two 4-bit input cycles for all 8 weight
// groups in the PE's order (LSB slice first, groups 0..7 each cycle) and
// checks every held sum against the reference recurrence, the first-slice
// reset of the feedback and the common mode of the pseudo-differential pair.
module tb_nnsa;
  import tb_npim_model::*;
  logic clk = 0, rst_n = 0;
  logic en, first;
  logic [2:0] grp;
  real vin_p [8];
  real vin_n [8];
  real vo_p [8];
  real vo_n [8];
  real model [8];
  int checks = 0, failures = 0;

  nnsa #(.GROUPS(8), .D(4)) dut (.clk, .rst_n, .en, .first, .grp, .vin_p, .vin_n, .vo_p, .vo_n);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; first = 0; grp = 0;
    for (int j = 0; j < 8; j++) begin vin_p[j] = 0.0; vin_n[j] = 0.0; end
    for (int g = 0; g < 8; g++) model[g] = 0.7;   // stale value, must be ignored on `first`
    #12 rst_n = 1;
    for (int w = 0; w < 3; w++)
      for (int s = 0; s < 2; s++)
        for (int g = 0; g < 8; g++) begin
          real dv [8];
          @(negedge clk);
          en = 1; first = (s == 0); grp = 3'(g);
          for (int j = 0; j < 8; j++) begin
            vin_p[j] = real'($urandom % 500) / 1000.0;
            vin_n[j] = real'($urandom % 500) / 1000.0;
            if (w == 2) vin_n[j] = 0.0;
            dv[j] = vin_p[j] - vin_n[j];
          end
          model[g] = m_nnsa((s == 0) ? 0.0 : model[g], dv, 4);
          @(negedge clk);
          en = 0;
          for (int j = 0; j < 8; j++) vin_p[j] = 0.45;   // idle inputs must not disturb
          @(negedge clk);
          checks++;
          if ((vo_p[g] - vo_n[g]) - model[g] > 1e-9 || model[g] - (vo_p[g] - vo_n[g]) > 1e-9) begin
            failures++;
            $display("w%0d s%0d g%0d: vo=%f expected %f", w, s, g, vo_p[g] - vo_n[g], model[g]);
          end
          checks++;
          if (vo_p[g] + vo_n[g] - 0.5 > 1e-9 || 0.5 - (vo_p[g] + vo_n[g]) > 1e-9) begin
            failures++;
            $display("common mode wrong: %f", vo_p[g] + vo_n[g]);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
