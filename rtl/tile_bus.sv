// tile_bus: the shared bus between buffer, PEs and post-processing unit.
//
// Two directions share the bus structure. Downstream, words read from the
// eDRAM are broadcast with a PE number and written into that PE's input
// register (ir_we is one-hot). Upstream, the result streams of the PEs are
// granted one beat at a time in strict rotation over the PEs enabled for the
// window (pe_en), starting at the lowest, so that with PE-sum mode the
// post-processing unit sees beat b of PE0, PE1, ... in order. A PE that is
// not yet valid holds the rotation. up_last marks the last beat of the last
// enabled PE. up_seq numbers the beats of the window across all PEs (the
// beat's position in the window's result block). The paper names the bus only; the arbitration is this
// design's choice.
module tile_bus
  import npim_pkg::*;
#(
  parameter int unsigned NPE    = 4,
  parameter int unsigned GROUPS = 8,
  parameter int unsigned IRW    = 10,
  localparam int unsigned PW    = (NPE > 1) ? $clog2(NPE) : 1
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // downstream: eDRAM -> IR
  input  logic                                   dn_valid,
  input  logic [PW-1:0]                          dn_pe,
  input  logic [IRW-1:0]                         dn_addr,
  input  logic [BUS_W-1:0]                       dn_data,
  output logic [NPE-1:0]                         ir_we,
  output logic [IRW-1:0]                         ir_waddr,
  output logic [BUS_W-1:0]                       ir_wdata,
  // upstream: PE results -> post-processing
  input  logic [NPE-1:0]                         pe_en,
  input  logic [NPE-1:0]                         pe_valid,
  output logic [NPE-1:0]                         pe_ready,
  input  logic [NPE-1:0][GROUPS-1:0][SUM_W-1:0]  pe_sums,
  input  logic [NPE-1:0][7:0]                    pe_idx,
  input  logic [NPE-1:0]                         pe_last,
  output logic                                   up_valid,
  input  logic                                   up_ready,
  output logic [GROUPS-1:0][SUM_W-1:0]           up_sums,
  output logic [7:0]                             up_idx,
  output logic [7:0]                             up_seq,
  output logic                                   up_last
);
  logic [PW-1:0] cur, nxt_pe, last_pe;
  logic          wrap;

  always_comb begin
    ir_we    = '0;
    ir_we[dn_pe] = dn_valid;
    ir_waddr = dn_addr;
    ir_wdata = dn_data;
  end

  // next enabled PE after cur (wrapping), and the highest enabled PE
  always_comb begin
    nxt_pe  = cur;
    wrap    = 1'b1;
    last_pe = '0;
    for (int unsigned p = 0; p < NPE; p++)
      if (pe_en[p]) last_pe = PW'(p);
    for (int i = NPE - 1; i >= 0; i--)
      if (pe_en[i] && (PW'(i) > cur)) begin nxt_pe = PW'(i); wrap = 1'b0; end
    if (wrap)
      for (int i = NPE - 1; i >= 0; i--)
        if (pe_en[i]) nxt_pe = PW'(i);
  end

  always_comb begin
    pe_ready      = '0;
    pe_ready[cur] = up_ready && pe_en[cur];
    up_valid      = pe_valid[cur] && pe_en[cur];
    up_sums       = pe_sums[cur];
    up_idx        = pe_idx[cur];
    up_last       = pe_last[cur] && (cur == last_pe);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur <= '0; up_seq <= '0;
    end else begin
      if (!pe_en[cur]) cur <= nxt_pe;
      else if (up_valid && up_ready) cur <= nxt_pe;
      if (up_valid && up_ready) up_seq <= up_last ? 8'd0 : up_seq + 8'd1;
    end
  end

  // at most one PE is granted the upstream bus
  a_onehot_grant: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(pe_ready));
endmodule
