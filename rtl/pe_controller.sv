// pe_controller: sequencer of one PE's analog dataflow and conversions.
//
// Stage 1 (analog accumulation, after `start`): NSLICE input cycles of GROUPS
// clocks each (2 x 8 clocks of 12.5 ns = 2 x 100 ns with 4-bit DACs). At the
// first clock of input cycle i the DACs drive slice i and the bitline S/H
// bank samples (bl_smp). In the next GROUPS clocks the NNS+A of every
// crossbar accumulates weight groups 0..7 in turn (nn_en, nn_grp; nn_first in
// input cycle 0). The last group of cycle i overlaps the bitline sampling of
// cycle i+1, which only disturbs the S/H after that edge, so stage 1 takes
// NSLICE*GROUPS + 1 clocks.
//
// Stage 2 begins with the one-time conversion: the shared NNADCs read the
// held sums NL = NNADCS*LANES at a time (conv_en, conv_base) and write the
// OR; one clock later the PE adder is started (add_start). A new window may
// start (can_start) once the held sums of the last one are converted, so
// stage 1 of window i+1 overlaps the adder of window i. If window i+1's
// sums are ready while the adder still reads the OR, the conversion waits
// and or_stall is high for each waiting clock.
//
// Timing and interlocks are this design's choice, built on the paper's
// numbers (100 ns input cycle, NNS+A at 80 MHz, 1.2 GS/s NNADCs, LSB-first
// bit slices, conversion only after the last input cycle).
module pe_controller
  import npim_pkg::*;
#(
  parameter int unsigned XBARS  = 64,
  parameter int unsigned GROUPS = 8,
  parameter int unsigned D      = 4,
  parameter int unsigned NL     = 60,
  localparam int unsigned NSLICE = (P_IN + D - 1) / D,
  localparam int unsigned SW     = (NSLICE > 1) ? $clog2(NSLICE) : 1,
  localparam int unsigned GW     = (GROUPS > 1) ? $clog2(GROUPS) : 1,
  localparam int unsigned NS     = XBARS * GROUPS,
  localparam int unsigned NW     = $clog2(NS + NL + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [6:0]    cfg_xbars,
  input  logic [6:0]    cfg_kernel_xbars,
  input  adc_range_e    cfg_range,
  output logic          can_start,
  output logic          s1_busy,
  output logic [SW-1:0] slice,
  output logic          bl_smp,
  output logic          nn_en,
  output logic          nn_first,
  output logic [GW-1:0] nn_grp,
  output logic          conv_en,
  output logic [NW-1:0] conv_base,
  output logic [NW-1:0] conv_total,
  output adc_range_e    conv_range,
  output logic          add_start,
  output logic [6:0]    add_xbars,
  output logic [6:0]    add_kernel_xbars,
  input  logic          add_busy,
  output logic          or_stall
);
  localparam int unsigned TEND = NSLICE * GROUPS;

  logic        s1_run, conv_pend, conv_run, drain;
  logic [31:0] t;
  logic [6:0]  s1_x, s1_k, c_x, c_k;
  adc_range_e  s1_r;

  assign s1_busy   = s1_run;
  assign can_start = !s1_run && !conv_pend && !conv_run;
  assign slice     = (t < 32'(TEND)) ? SW'(t / GROUPS) : SW'(NSLICE - 1);
  assign bl_smp    = s1_run && (t < 32'(TEND)) && (t % GROUPS == 0);
  assign nn_en     = s1_run && (t >= 32'd1);
  assign nn_grp    = GW'((t - 32'd1) % GROUPS);
  assign nn_first  = ((t - 32'd1) < 32'(GROUPS));
  assign conv_en   = conv_run;
  assign or_stall  = conv_pend && !conv_run && (add_busy || drain);
  assign add_xbars        = c_x;
  assign add_kernel_xbars = c_k;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_run <= 1'b0; conv_pend <= 1'b0; conv_run <= 1'b0; drain <= 1'b0;
      t <= '0; conv_base <= '0; conv_total <= '0; add_start <= 1'b0;
      s1_x <= '0; s1_k <= '0; c_x <= '0; c_k <= '0;
      s1_r <= RANGE_HALF; conv_range <= RANGE_HALF;
    end else begin
      add_start <= 1'b0;
      // stage 1
      if (start && can_start) begin
        s1_run <= 1'b1; t <= '0;
        s1_x <= cfg_xbars; s1_k <= cfg_kernel_xbars; s1_r <= cfg_range;
      end else if (s1_run) begin
        if (t == 32'(TEND)) begin
          s1_run <= 1'b0; conv_pend <= 1'b1;
        end
        t <= t + 32'd1;
      end
      // stage 2: conversion, then the adder
      if (conv_pend && !conv_run && !add_busy && !drain) begin
        conv_run   <= 1'b1; conv_pend <= 1'b0;
        conv_base  <= '0;
        conv_total <= NW'(s1_x) * NW'(GROUPS);
        conv_range <= s1_r;
        c_x <= s1_x; c_k <= s1_k;
      end else if (conv_run) begin
        if (conv_base + NW'(NL) >= conv_total) begin
          conv_run <= 1'b0; drain <= 1'b1;
        end
        conv_base <= conv_base + NW'(NL);
      end
      if (drain) begin
        drain <= 1'b0; add_start <= 1'b1;
      end
    end
  end
endmodule
