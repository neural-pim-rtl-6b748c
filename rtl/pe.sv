// pe: one Neural-PIM processing element.
//
// XBARS crossbars (128x128, 1-bit cells, 4-bit DACs) share one input
// register. Each crossbar's 128 bitlines are captured by a sample_hold bank
// and feed one NNS+A, which in turn accumulates the crossbar's 8 weight
// groups (16 bitlines each: W^P bits 0..7 then W^N bits 0..7) over the
// input cycles. After the last input cycle NNADCS shared NNADCs (LANES
// conversions per clock each) digitise all XBARS*8 held sums through a
// multiplexer into the output register, and the PE adder sums the codes of
// the crossbars that hold one kernel and streams the results out.
//
// Interface: weight programming (prog_*: crossbar select, one-hot rows,
// column mask, data), IR write port (ir_*), window control (start with its
// configuration, can_start, s1_busy), result stream (out_*) and the or_stall
// event. Timing: stage 1 = NSLICE*8 + 1 clocks from start; conversion
// ceil(xbars*8/NL) clocks; the adder one clock per crossbar plus output
// back-pressure. See pe_controller.
//
// From the paper: 64 crossbars, one NNS+A per crossbar, 4 shared NNADCs per
// PE reached through multiplexers, IR/OR shared by all crossbars, W^P/W^N in
// adjacent columns, the adder. Clocking and sequencing are this design's.
module pe
  import npim_pkg::*;
#(
  parameter int unsigned XBARS  = 64,
  parameter int unsigned ROWS   = 128,
  parameter int unsigned COLS   = 128,
  parameter int unsigned D      = 4,
  parameter int unsigned NNADCS = 4,
  parameter int unsigned LANES  = 15,
  localparam int unsigned GROUPS = COLS / COLS_PER_WEIGHT,
  localparam int unsigned GW     = (GROUPS > 1) ? $clog2(GROUPS) : 1,
  localparam int unsigned XW     = (XBARS > 1) ? $clog2(XBARS) : 1,
  localparam int unsigned NL     = NNADCS * LANES,
  localparam int unsigned NSLICE = (P_IN + D - 1) / D,
  localparam int unsigned SW     = (NSLICE > 1) ? $clog2(NSLICE) : 1,
  localparam int unsigned IRW    = (XBARS * ROWS / BUS_BYTES > 1) ? $clog2(XBARS * ROWS / BUS_BYTES) : 1,
  localparam int unsigned NS     = XBARS * GROUPS,
  localparam int unsigned IW     = $clog2(NS),
  localparam int unsigned NW     = $clog2(NS + NL + 1)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // weight programming
  input  logic                         prog_en,
  input  logic [XW-1:0]                prog_xbar,
  input  logic [ROWS-1:0]              prog_row_sel,
  input  logic [COLS-1:0]              prog_col_mask,
  input  logic [COLS-1:0]              prog_data,
  // input register fill
  input  logic                         ir_we,
  input  logic [IRW-1:0]               ir_waddr,
  input  logic [BUS_W-1:0]             ir_wdata,
  // window control
  input  logic                         start,
  input  logic [6:0]                   cfg_xbars,
  input  logic [6:0]                   cfg_kernel_xbars,
  input  adc_range_e                   cfg_range,
  output logic                         can_start,
  output logic                         s1_busy,
  // results
  output logic                         out_valid,
  input  logic                         out_ready,
  output logic [GROUPS-1:0][SUM_W-1:0] out_sums,
  output logic [7:0]                   out_idx,
  output logic                         out_last,
  output logic                         or_stall
);
  logic [SW-1:0]                     slice;
  logic                              bl_smp, nn_en, nn_first, conv_en, add_start, add_busy;
  logic [GW-1:0]                     nn_grp;
  logic [NW-1:0]                     conv_base, conv_total;
  adc_range_e                        conv_range;
  logic [6:0]                        add_x, add_k;
  logic [XBARS-1:0][ROWS-1:0][D-1:0] wl_code;

  real vo_p_all [NS];
  real vo_n_all [NS];

  pe_controller #(.XBARS(XBARS), .GROUPS(GROUPS), .D(D), .NL(NL)) u_ctrl (
    .clk, .rst_n, .start, .cfg_xbars, .cfg_kernel_xbars, .cfg_range,
    .can_start, .s1_busy, .slice, .bl_smp, .nn_en, .nn_first, .nn_grp,
    .conv_en, .conv_base, .conv_total, .conv_range, .add_start,
    .add_xbars(add_x), .add_kernel_xbars(add_k), .add_busy, .or_stall
  );

  input_register #(.XBARS(XBARS), .ROWS(ROWS), .D(D)) u_ir (
    .clk, .we(ir_we), .waddr(ir_waddr), .wdata(ir_wdata), .slice, .wl_code
  );

  for (genvar x = 0; x < XBARS; x++) begin : g_xb
    real blv [COLS];
    real bls [COLS];
    real vinp [P_W];
    real vinn [P_W];
    real vop [GROUPS];
    real von [GROUPS];

    rram_crossbar #(.ROWS(ROWS), .COLS(COLS), .D(D)) u_xbar (
      .clk,
      .prog_row_sel (prog_row_sel & {ROWS{prog_en && (prog_xbar == XW'(x))}}),
      .prog_col_mask(prog_col_mask),
      .prog_data    (prog_data),
      .wl_code      (wl_code[x]),
      .bl_v         (blv)
    );

    sample_hold #(.W(COLS)) u_bl_sh (
      .clk, .rst_n, .smp({COLS{bl_smp}}), .d(blv), .q(bls)
    );

    always_comb begin
      for (int unsigned j = 0; j < P_W; j++) begin
        vinp[j] = bls[32'(nn_grp) * COLS_PER_WEIGHT + j];
        vinn[j] = bls[32'(nn_grp) * COLS_PER_WEIGHT + P_W + j];
      end
    end

    nnsa #(.GROUPS(GROUPS), .D(D)) u_nnsa (
      .clk, .rst_n, .en(nn_en), .first(nn_first), .grp(nn_grp),
      .vin_p(vinp), .vin_n(vinn), .vo_p(vop), .vo_n(von)
    );

    for (genvar g = 0; g < GROUPS; g++) begin : g_grp
      assign vo_p_all[x*GROUPS + g] = vop[g];
      assign vo_n_all[x*GROUPS + g] = von[g];
    end
  end

  // multiplexers from the held NNS+A outputs to the shared NNADC lanes
  logic [NL-1:0]            or_we;
  logic [NL-1:0][IW-1:0]    or_widx;
  logic [NL-1:0][P_OUT-1:0] or_wdata;
  logic [NW-1:0]            base_q, total_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base_q <= '0; total_q <= '0;
    end else if (conv_en) begin
      base_q <= conv_base; total_q <= conv_total;
    end
  end

  for (genvar a = 0; a < NNADCS; a++) begin : g_adc
    real              vp [LANES];
    real              vn [LANES];
    logic [P_OUT-1:0] code [LANES];
    logic             valid;

    always_comb begin
      for (int unsigned l = 0; l < LANES; l++) begin
        int unsigned n;
        n = 32'(conv_base) + a * LANES + l;
        vp[l] = (n < NS) ? vo_p_all[n] : 0.0;
        vn[l] = (n < NS) ? vo_n_all[n] : 0.0;
      end
    end

    nnadc #(.LANES(LANES)) u_nnadc (
      .clk, .rst_n, .en(conv_en), .range(conv_range),
      .vp, .vn, .valid, .code
    );

    always_comb begin
      for (int unsigned l = 0; l < LANES; l++) begin
        int unsigned n;
        n = 32'(base_q) + a * LANES + l;
        or_we[a*LANES + l]    = valid && (n < 32'(total_q));
        or_widx[a*LANES + l]  = IW'(n);
        or_wdata[a*LANES + l] = code[l];
      end
    end
  end

  logic [XW-1:0]                or_raddr;
  logic [GROUPS-1:0][P_OUT-1:0] or_rdata;

  output_register #(.XBARS(XBARS), .GROUPS(GROUPS), .WL(NL)) u_or (
    .clk, .we(or_we), .widx(or_widx), .wdata(or_wdata), .raddr(or_raddr), .rdata(or_rdata)
  );

  pe_adder #(.XBARS(XBARS), .GROUPS(GROUPS)) u_add (
    .clk, .rst_n, .start(add_start), .xbars(add_x), .kernel_xbars(add_k),
    .or_raddr, .or_rdata, .busy(add_busy),
    .out_valid, .out_ready, .out_sums, .out_idx, .out_last
  );
endmodule
