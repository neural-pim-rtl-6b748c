// nnsa: behavioural model of one neural-approximated analog shift-and-add.
//
// Not synthesizable logic: the real circuit is a pseudo-differential
// 10 x 12 x 1 neural network built from RRAM crossbars and CMOS inverters.
// This model applies the ideal function that network is trained to (paper
// Sec. 4.1.2, Step 3), once per call:
//     Vo,i = ( 2^-D * Vo,i-1 + sum_{j=0..7} 2^j * Vin,j ) / alpha,
//     alpha = 2^-D + sum_{j=0..7} 2^j,
// where Vin,j is the pseudo-differential input pair j (bitline of weight bit j
// of W^P minus bitline of bit j of W^N) and Vo,i-1 is the sum held from the
// previous input cycle. Inputs are streamed LSB slice first; on the first
// slice (`first`) the held sum counts as 0.
//
// One NNS+A serves the GROUPS (8) weight vectors of a 128-column crossbar in
// turn: at 80 MHz it completes 8 accumulations in one 100 ns input cycle.
// Each group keeps its own running sum as a pseudo-differential pair
// (Vo^P, Vo^N) = (VCM + Vo/2, VCM - Vo/2) in the feedback sample_hold bank
// (2 x GROUPS cells). With `en` high, group `grp` is updated at the clock
// edge; vo_p/vo_n show the held pairs of every group.
//
// From the paper: the recurrence, alpha, LSB-first streaming, the W^P/W^N
// input pairs and the S/H feedback. The common-mode level VCM = V_FS/2 and
// the ideal (error-free) behaviour are this model's choices.
module nnsa
  import npim_pkg::*;
#(
  parameter int unsigned GROUPS = 8,
  parameter int unsigned D      = 4,
  parameter int unsigned NB     = P_W,
  localparam int unsigned GW    = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          first,
  input  logic [GW-1:0] grp,
  input  real           vin_p [NB],
  input  real           vin_n [NB],
  output real           vo_p  [GROUPS],
  output real           vo_n  [GROUPS]
);
  localparam real SHIFT = 1.0 / real'(1 << D);
  localparam real ALPHA = SHIFT + real'((1 << NB) - 1);
  localparam real VCM   = V_FS / 2.0;

  real                  fb_d [2*GROUPS];
  real                  fb_q [2*GROUPS];
  logic [2*GROUPS-1:0]  fb_smp;
  real                  vnew;

  always_comb begin
    real prev, acc;
    prev = first ? 0.0 : (fb_q[2*grp] - fb_q[2*grp+1]);
    acc  = SHIFT * prev;
    for (int unsigned j = 0; j < NB; j++)
      acc += real'(1 << j) * (vin_p[j] - vin_n[j]);
    vnew = acc / ALPHA;
    fb_smp = '0;
    for (int unsigned g = 0; g < GROUPS; g++) begin
      fb_d[2*g]   = VCM + vnew / 2.0;
      fb_d[2*g+1] = VCM - vnew / 2.0;
      if (en && (g == 32'(grp))) fb_smp[2*g +: 2] = 2'b11;
    end
  end

  sample_hold #(.W(2*GROUPS)) u_fb_sh (
    .clk(clk), .rst_n(rst_n), .smp(fb_smp), .d(fb_d), .q(fb_q)
  );

  always_comb begin
    for (int unsigned g = 0; g < GROUPS; g++) begin
      vo_p[g] = fb_q[2*g];
      vo_n[g] = fb_q[2*g+1];
    end
  end
endmodule
