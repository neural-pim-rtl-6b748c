// sample_hold: behavioural model of a bank of W analog sample-and-hold cells.
//
// Not synthesizable logic: it stores analog voltages. On a clock edge each
// cell whose smp bit is set takes its input voltage d[i] (sampling phase
// phi1) and holds it at q[i] until sampled again (hold/transfer phase phi2).
// Reset clears every held voltage to 0 V. One clock of latency, no noise or
// charge-transfer loss. In a PE 144 such cells serve each crossbar: 128 on
// the bitlines and 16 in the NNS+A feedback path (8 weight groups x the
// pseudo-differential pair), as the paper's S+H count of 64 x 144 per PE
// implies. The ideal behaviour is this model's choice.
module sample_hold #(
  parameter int unsigned W = 128
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] smp,
  input  real          d [W],
  output real          q [W]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < W; i++) q[i] <= 0.0;
    end else begin
      for (int unsigned i = 0; i < W; i++)
        if (smp[i]) q[i] <= d[i];
    end
  end
endmodule
