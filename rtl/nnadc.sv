// nnadc: behavioural model of a shared, input-range-aware 8-bit neural ADC.
//
// Not synthesizable logic: it models a mixed-signal converter built from RRAM
// crossbars and inverters. Its ideal transfer function is the one it is
// trained to (paper Sec. 4.2):
//     code = round( Vin / Vmax * (2^8 - 1) ),  Vin = vp - vn,
// clamped to [0, 255]. Vmax is one of three pre-trained models chosen per DNN
// layer by `range`: 0.5, 0.25 or 0.125 x VDD. The paper defines the range as
// [0, Vmax]; a negative differential input therefore reads as code 0 (this
// model's choice). LANES conversions are made per clock: at 1.2 GS/s against
// the 80 MHz controller clock one NNADC completes 15 conversions per clock.
// Codes appear on the clock edge after `en` (one clock latency).
module nnadc
  import npim_pkg::*;
#(
  parameter int unsigned LANES = 15,
  parameter int unsigned BITS  = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en,
  input  adc_range_e      range,
  input  real             vp [LANES],
  input  real             vn [LANES],
  output logic            valid,
  output logic [BITS-1:0] code [LANES]
);
  localparam real FULL = real'((1 << BITS) - 1);

  function automatic logic [BITS-1:0] quantize(real v, real vmax);
    real x;
    x = v / vmax * FULL;
    if (x <= 0.0)  return '0;
    if (x >= FULL) return '1;
    return BITS'($rtoi(x + 0.5));
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= 1'b0;
      for (int unsigned l = 0; l < LANES; l++) code[l] <= '0;
    end else begin
      valid <= en;
      if (en)
        for (int unsigned l = 0; l < LANES; l++)
          code[l] <= quantize(vp[l] - vn[l], range_vmax(range));
    end
  end
endmodule
