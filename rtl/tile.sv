// tile: one Neural-PIM processing tile.
//
// NPE processing elements share an eDRAM global buffer, a bus, a
// post-processing unit, a controller and row/column decoders for weight
// programming; a port pair attaches the tile to its c-mesh router.
//
// Operation of one sliding window (one control vector, see npim_pkg):
//  stage 1  the controller copies each enabled PE's inputs from the buffer
//           into its IR and starts the PEs, which accumulate all input bit
//           slices in the analog domain (NNS+A);
//  stage 2  each PE converts the held sums once (NNADCs) and its adder sums
//           the crossbars of each kernel; the bus passes the beats to the
//           post-processing unit (optional sum over PEs, activation,
//           pooling or LSTM element-wise stage), whose results are written
//           to the buffer at out_base + beat, or sent as NoC flits when
//           out_tile is another tile (or off chip).
// Stage 2 of window i overlaps stage 1 of window i+1. Flits arriving from
// the NoC are written into the buffer when the post-processing unit is not
// writing it locally (it has priority; the NoC input is back-pressured).
//
// Programming: prog_en with prog_pe, prog_xbar, prog_row, and prog_grp (or
// prog_all) writes prog_data into the selected columns of one crossbar row.
// Events (one clock each): ev_or_stall (a PE's conversion waits for its
// OR), ev_start_stall (a window waits for the PEs), ev_noc_block (a
// finished result or an arriving flit waits for the NoC or the buffer).
//
// From the paper: tile content (Fig. 7(b)), 4 PEs per tile, two-stage
// pipeline, eDRAM read/write split over the stages. The rest is this
// design's.
module tile
  import npim_pkg::*;
#(
  parameter int unsigned NPE    = 4,
  parameter int unsigned XBARS  = 64,
  parameter int unsigned ROWS   = 128,
  parameter int unsigned COLS   = 128,
  parameter int unsigned D      = 4,
  parameter int unsigned NNADCS = 4,
  parameter int unsigned LANES  = 15,
  parameter int unsigned WORDS  = 8192,
  localparam int unsigned GROUPS = COLS / COLS_PER_WEIGHT,
  localparam int unsigned GW     = (GROUPS > 1) ? $clog2(GROUPS) : 1,
  localparam int unsigned XW     = (XBARS > 1) ? $clog2(XBARS) : 1,
  localparam int unsigned RW     = $clog2(ROWS),
  localparam int unsigned PW     = (NPE > 1) ? $clog2(NPE) : 1,
  localparam int unsigned AW     = $clog2(WORDS),
  localparam int unsigned IRW    = (XBARS * ROWS / BUS_BYTES > 1) ? $clog2(XBARS * ROWS / BUS_BYTES) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [9:0]      tile_id,
  // weight programming
  input  logic            prog_en,
  input  logic [PW-1:0]   prog_pe,
  input  logic [XW-1:0]   prog_xbar,
  input  logic [RW-1:0]   prog_row,
  input  logic [GW-1:0]   prog_grp,
  input  logic            prog_all,
  input  logic [COLS-1:0] prog_data,
  // control vectors
  input  logic            cv_valid,
  output logic            cv_ready,
  input  ctrl_vec_t       cv,
  // NoC
  input  logic            noc_in_valid,
  output logic            noc_in_ready,
  input  flit_t           noc_in_flit,
  output logic            noc_out_valid,
  input  logic            noc_out_ready,
  output flit_t           noc_out_flit,
  // status
  output logic            idle,
  output logic            ev_or_stall,
  output logic            ev_start_stall,
  output logic            ev_noc_block
);
  // ---------------- programming decoders ----------------
  logic [ROWS-1:0] row_sel;
  logic [COLS-1:0] col_mask;

  row_decoder #(.ROWS(ROWS)) u_rowdec (.en(prog_en), .addr(prog_row), .sel(row_sel));
  column_decoder #(.COLS(COLS), .GCOLS(COLS_PER_WEIGHT)) u_coldec (
    .en(prog_en), .all(prog_all), .grp(prog_grp), .mask(col_mask)
  );

  // ---------------- controller ----------------
  logic                  rd_en, dn_valid;
  logic [AW-1:0]         rd_addr;
  logic [PW-1:0]         dn_pe;
  logic [IRW-1:0]        dn_addr;
  logic [NPE-1:0]        pe_start, pe_can_start, pe_s1_busy;
  ctrl_vec_t             s1_cv, s2_cv;
  logic                  s2_valid, s2_done, done_pend;

  tile_controller #(.NPE(NPE), .WORDS(WORDS), .IRW(IRW)) u_ctrl (
    .clk, .rst_n, .cv_valid, .cv_ready, .cv_in(cv),
    .rd_en, .rd_addr, .dn_valid, .dn_pe, .dn_addr,
    .pe_start, .s1_cv, .pe_can_start, .pe_s1_busy,
    .s2_valid, .s2_cv, .s2_done, .start_stall(ev_start_stall), .idle
  );

  // ---------------- buffer ----------------
  logic [BUS_W-1:0] rd_data, wr_data;
  logic             wr_en;
  logic [AW-1:0]    wr_addr;

  global_buffer #(.WORDS(WORDS)) u_buf (
    .clk, .re(rd_en), .raddr(rd_addr), .rdata(rd_data),
    .we(wr_en), .waddr(wr_addr), .wdata(wr_data)
  );

  // ---------------- bus and PEs ----------------
  logic [NPE-1:0]                         ir_we, pe_valid, pe_ready, pe_last, pe_or_stall;
  logic [IRW-1:0]                         ir_waddr;
  logic [BUS_W-1:0]                       ir_wdata;
  logic [NPE-1:0][GROUPS-1:0][SUM_W-1:0]  pe_sums;
  logic [NPE-1:0][7:0]                    pe_idx;
  logic                                   up_valid, up_ready, up_last;
  logic [GROUPS-1:0][SUM_W-1:0]           up_sums;
  logic [7:0]                             up_idx, up_seq, pp_in_idx;
  logic [NPE-1:0]                         bus_en;

  assign bus_en = (s2_valid && !done_pend) ? s2_cv.pe_en[NPE-1:0] : '0;

  tile_bus #(.NPE(NPE), .GROUPS(GROUPS), .IRW(IRW)) u_bus (
    .clk, .rst_n,
    .dn_valid, .dn_pe, .dn_addr, .dn_data(rd_data),
    .ir_we, .ir_waddr, .ir_wdata,
    .pe_en(bus_en), .pe_valid, .pe_ready, .pe_sums, .pe_idx, .pe_last,
    .up_valid, .up_ready, .up_sums, .up_idx, .up_seq, .up_last
  );

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    pe #(.XBARS(XBARS), .ROWS(ROWS), .COLS(COLS), .D(D), .NNADCS(NNADCS), .LANES(LANES)) u_pe (
      .clk, .rst_n,
      .prog_en(prog_en && (prog_pe == PW'(p))), .prog_xbar,
      .prog_row_sel(row_sel), .prog_col_mask(col_mask), .prog_data,
      .ir_we(ir_we[p]), .ir_waddr, .ir_wdata,
      .start(pe_start[p]), .cfg_xbars(s1_cv.xbars), .cfg_kernel_xbars(s1_cv.kernel_xbars),
      .cfg_range(s1_cv.adc_range), .can_start(pe_can_start[p]), .s1_busy(pe_s1_busy[p]),
      .out_valid(pe_valid[p]), .out_ready(pe_ready[p]), .out_sums(pe_sums[p]),
      .out_idx(pe_idx[p]), .out_last(pe_last[p]), .or_stall(pe_or_stall[p])
    );
  end
  assign ev_or_stall = |pe_or_stall;

  // ---------------- post-processing ----------------
  logic                   pp_valid, pp_ready, win_done, local_wr;
  logic [GROUPS-1:0][7:0] pp_data;
  logic [7:0]             pp_idx;
  logic [2:0]             acc_n;

  always_comb begin
    acc_n = 3'd1;
    if (s2_cv.pe_sum) begin
      acc_n = 3'd0;
      for (int unsigned p = 0; p < NPE; p++) acc_n += 3'(s2_cv.pe_en[p]);
    end
  end

  // result position: kernel index when PEs are summed, else beat of window
  assign pp_in_idx = s2_cv.pe_sum ? up_idx : up_seq;

  post_processing #(.GROUPS(GROUPS)) u_pp (
    .clk, .rst_n, .act(s2_cv.act), .zero_point(s2_cv.zero_point), .acc_n,
    .pool_first(s2_cv.pool_first), .pool_last(s2_cv.pool_last),
    .in_valid(up_valid), .in_ready(up_ready), .in_sums(up_sums), .in_idx(pp_in_idx), .in_last(up_last),
    .out_valid(pp_valid), .out_ready(pp_ready), .out_data(pp_data), .out_idx(pp_idx), .win_done
  );

  // a window retires once its last beat is consumed and its result is out
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        done_pend <= 1'b0;
    else if (win_done) done_pend <= 1'b1;
    else if (s2_done)  done_pend <= 1'b0;
  end
  assign s2_done = done_pend && !pp_valid;

  // ---------------- buffer writes and NoC ----------------
  assign local_wr      = pp_valid && (s2_cv.out_tile == tile_id);
  assign pp_ready      = local_wr || noc_out_ready;
  assign noc_out_valid = pp_valid && !local_wr;
  assign noc_out_flit  = '{dst_tile: s2_cv.out_tile,
                           addr:     s2_cv.out_base + 16'(pp_idx),
                           data:     pp_data};
  assign noc_in_ready  = !local_wr;
  assign wr_en         = local_wr || noc_in_valid;
  assign wr_addr       = local_wr ? AW'(s2_cv.out_base + 16'(pp_idx)) : AW'(noc_in_flit.addr);
  assign wr_data       = local_wr ? pp_data : noc_in_flit.data;
  assign ev_noc_block  = (noc_out_valid && !noc_out_ready) || (noc_in_valid && !noc_in_ready);
endmodule
