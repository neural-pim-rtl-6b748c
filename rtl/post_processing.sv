// post_processing: the tile's digital post-processing unit.
//
// Consumes beats of GROUPS kernel sums from the tile bus and produces beats
// of GROUPS 8-bit activations for the buffer. Per beat, in order:
//  1. accumulate: acc_n consecutive beats are added (tile-level sum of the
//     same kernel computed on several PEs; acc_n = 1 passes beats through);
//  2. activation on s = sum - zero_point, read as a signed fixed-point value
//     with 4 fraction bits:
//       ACT_NONE    signed saturation to int8,
//       ACT_RELU    max(0, s) saturated to 0..255,
//       ACT_SIGMOID hard sigmoid 0.5 + x/4 as 0..255 (Q0.8),
//       ACT_TANH    hard tanh clamp(x, -1, 1) as int8 (Q1.7),
//       ACT_LSTM    LSTM element-wise stage (below);
//  3. max pooling across windows: the result of beat `idx` is kept in a pool
//     memory; pool_first starts a new maximum, and the beat is only emitted
//     when pool_last is set (both set = no pooling).
// In ACT_LSTM mode lanes 4u..4u+3 hold the gate pre-activations i, f, o and
// the candidate c~ of hidden unit u. The unit computes
//     c = f*c_prev + i*c~,  h = o*tanh(c)
// with hard sigmoid/tanh, keeps c (Q.7, 16 bits) in a cell-state memory per
// (idx, u), starts from c_prev = 0 when pool_first is set (first time step)
// and emits h of unit u in lane u, other lanes 0. Pooling is not applied.
//
// Handshake: in_ready = !out_valid || out_ready; the output is registered.
// win_done pulses with the consumption of the beat marked in_last.
//
// The paper lists the functions (tanh, sigmoid, ReLU, pooling, the LSTM
// element-wise rows, tile-level aggregation); the fixed-point formats, the
// hard (piece-wise linear) sigmoid and tanh and the zero point are this
// design's choices.
module post_processing
  import npim_pkg::*;
#(
  parameter int unsigned GROUPS = 8,
  parameter int unsigned BEATS  = 256,
  localparam int unsigned UNITS = GROUPS / 4,
  localparam int unsigned BW    = $clog2(BEATS)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  act_e                         act,
  input  logic [15:0]                  zero_point,
  input  logic [2:0]                   acc_n,
  input  logic                         pool_first,
  input  logic                         pool_last,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  logic [GROUPS-1:0][SUM_W-1:0] in_sums,
  input  logic [7:0]                   in_idx,
  input  logic                         in_last,
  output logic                         out_valid,
  input  logic                         out_ready,
  output logic [GROUPS-1:0][7:0]       out_data,
  output logic [7:0]                   out_idx,
  output logic                         win_done
);
  logic [GROUPS-1:0][SUM_W+2:0] acc;
  logic [2:0]                   acc_cnt;
  logic [GROUPS-1:0][7:0]       pmem [BEATS];
  logic signed [15:0]           cmem [BEATS * UNITS];

  function automatic logic signed [19:0] pre(logic [SUM_W+2:0] x, logic [15:0] zp);
    return $signed({1'b0, x}) - $signed({4'b0, zp});
  endfunction
  function automatic logic [7:0] sat_u8(logic signed [31:0] v);
    if (v < 0)   return 8'd0;
    if (v > 255) return 8'd255;
    return v[7:0];
  endfunction
  function automatic logic [7:0] sat_s8(logic signed [31:0] v);
    if (v < -128) return 8'h80;
    if (v > 127)  return 8'h7f;
    return v[7:0];
  endfunction
  function automatic logic [7:0] hsig(logic signed [19:0] s);   // Q0.8
    return sat_u8(32'sd128 + 32'(s) * 4);
  endfunction
  function automatic logic [7:0] htanh(logic signed [19:0] s);  // Q1.7
    return sat_s8(32'(s) * 8);
  endfunction

  logic                          fire, complete, signed_cmp;
  logic [GROUPS-1:0][SUM_W+2:0]  tot;
  logic [GROUPS-1:0][7:0]        y, pooled;
  logic signed [15:0]            c_new [UNITS];
  logic [7:0]                    h_u [UNITS];

  assign in_ready   = !out_valid || out_ready;
  assign fire       = in_valid && in_ready;
  assign complete   = (acc_cnt + 3'd1 >= acc_n);
  assign signed_cmp = (act == ACT_NONE) || (act == ACT_TANH);

  always_comb begin
    for (int unsigned g = 0; g < GROUPS; g++)
      tot[g] = acc[g] + (SUM_W+3)'(in_sums[g]);
    for (int unsigned g = 0; g < GROUPS; g++) begin
      logic signed [19:0] s;
      s = pre(tot[g], zero_point);
      case (act)
        ACT_RELU:    y[g] = sat_u8(32'(s));
        ACT_SIGMOID: y[g] = hsig(s);
        ACT_TANH:    y[g] = htanh(s);
        default:     y[g] = sat_s8(32'(s));
      endcase
    end
    for (int unsigned u = 0; u < UNITS; u++) begin
      logic signed [31:0] ig, fg, og, cg, cp, hc;
      ig = 32'(hsig(pre(tot[4*u],   zero_point)));
      fg = 32'(hsig(pre(tot[4*u+1], zero_point)));
      og = 32'(hsig(pre(tot[4*u+2], zero_point)));
      cg = 32'($signed(htanh(pre(tot[4*u+3], zero_point))));
      cp = pool_first ? 32'sd0 : 32'(cmem[32'(in_idx) * UNITS + u]);
      c_new[u] = 16'(((fg * cp) >>> 8) + ((ig * cg) >>> 8));
      hc = 32'($signed(sat_s8(32'(c_new[u]))));
      h_u[u] = 8'((og * hc) >>> 8);
    end
    if (act == ACT_LSTM) begin
      y = '0;
      for (int unsigned u = 0; u < UNITS; u++) y[u] = h_u[u];
    end
    for (int unsigned g = 0; g < GROUPS; g++) begin
      logic [7:0] p;
      p = pmem[BW'(in_idx)][g];
      if (pool_first || act == ACT_LSTM) pooled[g] = y[g];
      else if (signed_cmp) pooled[g] = ($signed(y[g]) > $signed(p)) ? y[g] : p;
      else                 pooled[g] = (y[g] > p) ? y[g] : p;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; acc_cnt <= '0; out_valid <= 1'b0; out_data <= '0;
      out_idx <= '0; win_done <= 1'b0;
    end else begin
      win_done <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin
        if (!complete) begin
          acc <= tot; acc_cnt <= acc_cnt + 3'd1;
        end else begin
          acc <= '0; acc_cnt <= '0;
          if (pool_last) begin
            out_valid <= 1'b1; out_data <= pooled; out_idx <= in_idx;
          end
          win_done <= in_last;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (fire && complete) begin
      pmem[BW'(in_idx)] <= pooled;
      if (act == ACT_LSTM)
        for (int unsigned u = 0; u < UNITS; u++)
          cmem[32'(in_idx) * UNITS + u] <= c_new[u];
    end
  end
endmodule
