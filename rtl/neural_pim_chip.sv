// neural_pim_chip: top level of the Neural-PIM accelerator chip.
//
// NTILES tiles are connected by a concentrated mesh: each router of a
// MESH_X x MESH_Y grid serves CONC = 4 adjacent tiles, tile t
// sitting on local port t % 4 of router t / 4, router r at (r % MESH_X,
// r / MESH_X). Mesh edges without a neighbour are closed. The west port of
// router (0, 0) is the chip's external link (the off-chip HyperTransport
// interface is not modelled; its flit stream is brought out as ht_*): flits
// entering there reach any tile's buffer, and flits a tile addresses to a
// tile number >= NTILES leave there.
//
// The host programs crossbar rows through the prog_* broadcast (prog_tile
// selects the tile) and loads control vectors through cv_* (cv_tile selects
// the tile; cv_ready reflects that tile). all_idle is high when every tile's
// control and result queues are empty. ev_* are the OR of the tiles' event
// pulses (see tile).
//
// Size: the chip the paper evaluates has 280 tiles (a 10 x 7 mesh with these
// rules). The default here is 8 tiles on a 2 x 1 mesh, with every tile at
// full size: linting 8 full tiles takes 1.7 GB, and 64 tiles already ran
// out of memory on a 16 GB machine. Set NTILES = 280, MESH_X = 10, MESH_Y = 7 for the
// paper's chip where the tools have the memory.
//
// From the paper: tiles of 4 PEs, c-mesh NoC with routers shared among
// adjacent tiles, external link. Mesh shape, host interface and event
// outputs are this design's choices.
module neural_pim_chip
  import npim_pkg::*;
#(
  parameter int unsigned NTILES = 8,
  parameter int unsigned CONC   = 4,
  parameter int unsigned MESH_X = 2,
  parameter int unsigned MESH_Y = 1,
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
  localparam int unsigned NR     = MESH_X * MESH_Y,
  localparam int unsigned NP     = CONC + 4
) (
  input  logic            clk,
  input  logic            rst_n,
  // weight programming
  input  logic            prog_en,
  input  logic [9:0]      prog_tile,
  input  logic [PW-1:0]   prog_pe,
  input  logic [XW-1:0]   prog_xbar,
  input  logic [RW-1:0]   prog_row,
  input  logic [GW-1:0]   prog_grp,
  input  logic            prog_all,
  input  logic [COLS-1:0] prog_data,
  // control vectors
  input  logic            cv_valid,
  input  logic [9:0]      cv_tile,
  input  ctrl_vec_t       cv,
  output logic            cv_ready,
  // external link (flits)
  input  logic            ht_in_valid,
  output logic            ht_in_ready,
  input  flit_t           ht_in_flit,
  output logic            ht_out_valid,
  input  logic            ht_out_ready,
  output flit_t           ht_out_flit,
  // status
  output logic            all_idle,
  output logic            ev_or_stall,
  output logic            ev_start_stall,
  output logic            ev_noc_block
);
  localparam int unsigned E = CONC, W = CONC + 1, N = CONC + 2, S = CONC + 3;

  logic  [NR-1:0][NP-1:0] r_in_valid, r_in_ready, r_out_valid, r_out_ready;
  flit_t [NR-1:0][NP-1:0] r_in_flit, r_out_flit;

  logic [NTILES-1:0] t_cv_ready, t_idle, t_or, t_st, t_nb;

  for (genvar t = 0; t < NTILES; t++) begin : g_tile
    localparam int unsigned R = t / CONC, L = t % CONC;
    tile #(.NPE(NPE), .XBARS(XBARS), .ROWS(ROWS), .COLS(COLS), .D(D),
           .NNADCS(NNADCS), .LANES(LANES), .WORDS(WORDS)) u_tile (
      .clk, .rst_n, .tile_id(10'(t)),
      .prog_en(prog_en && (prog_tile == 10'(t))), .prog_pe, .prog_xbar, .prog_row,
      .prog_grp, .prog_all, .prog_data,
      .cv_valid(cv_valid && (cv_tile == 10'(t))), .cv_ready(t_cv_ready[t]), .cv,
      .noc_in_valid (r_out_valid[R][L]), .noc_in_ready(r_out_ready[R][L]), .noc_in_flit(r_out_flit[R][L]),
      .noc_out_valid(r_in_valid[R][L]),  .noc_out_ready(r_in_ready[R][L]), .noc_out_flit(r_in_flit[R][L]),
      .idle(t_idle[t]), .ev_or_stall(t_or[t]), .ev_start_stall(t_st[t]), .ev_noc_block(t_nb[t])
    );
  end

  for (genvar r = 0; r < NR; r++) begin : g_rt
    localparam int unsigned X = r % MESH_X, Y = r / MESH_X;
    noc_router #(.CONC(CONC), .MESH_X(MESH_X), .NTILES(NTILES), .RX(X), .RY(Y)) u_rt (
      .clk, .rst_n,
      .in_valid(r_in_valid[r]), .in_ready(r_in_ready[r]), .in_flit(r_in_flit[r]),
      .out_valid(r_out_valid[r]), .out_ready(r_out_ready[r]), .out_flit(r_out_flit[r])
    );
    // local ports without a tile
    for (genvar l = 0; l < CONC; l++) begin : g_nolocal
      if (r * CONC + l >= NTILES) begin : g_tie
        assign r_in_valid[r][l]  = 1'b0;
        assign r_in_flit[r][l]   = '0;
        assign r_out_ready[r][l] = 1'b1;
      end
    end
    // east link
    if (X + 1 < MESH_X) begin : g_e
      assign r_in_valid[r][E]  = r_out_valid[r+1][W];
      assign r_in_flit[r][E]   = r_out_flit[r+1][W];
      assign r_out_ready[r+1][W] = r_in_ready[r][E];
    end else begin : g_e_tie
      assign r_in_valid[r][E]  = 1'b0;
      assign r_in_flit[r][E]   = '0;
      assign r_out_ready[r][E] = 1'b1;
    end
    // west link (router 0: external link)
    if (X > 0) begin : g_w
      assign r_in_valid[r][W]  = r_out_valid[r-1][E];
      assign r_in_flit[r][W]   = r_out_flit[r-1][E];
      assign r_out_ready[r-1][E] = r_in_ready[r][W];
    end else if (r == 0) begin : g_ht
      assign r_in_valid[r][W]  = ht_in_valid;
      assign r_in_flit[r][W]   = ht_in_flit;
      assign ht_in_ready       = r_in_ready[r][W];
      assign ht_out_valid      = r_out_valid[r][W];
      assign ht_out_flit       = r_out_flit[r][W];
      assign r_out_ready[r][W] = ht_out_ready;
    end else begin : g_w_tie
      assign r_in_valid[r][W]  = 1'b0;
      assign r_in_flit[r][W]   = '0;
      assign r_out_ready[r][W] = 1'b1;
    end
    // north link
    if (Y + 1 < MESH_Y) begin : g_n
      assign r_in_valid[r][N]  = r_out_valid[r+MESH_X][S];
      assign r_in_flit[r][N]   = r_out_flit[r+MESH_X][S];
      assign r_out_ready[r+MESH_X][S] = r_in_ready[r][N];
    end else begin : g_n_tie
      assign r_in_valid[r][N]  = 1'b0;
      assign r_in_flit[r][N]   = '0;
      assign r_out_ready[r][N] = 1'b1;
    end
    // south link
    if (Y > 0) begin : g_s
      assign r_in_valid[r][S]  = r_out_valid[r-MESH_X][N];
      assign r_in_flit[r][S]   = r_out_flit[r-MESH_X][N];
      assign r_out_ready[r-MESH_X][N] = r_in_ready[r][S];
    end else begin : g_s_tie
      assign r_in_valid[r][S]  = 1'b0;
      assign r_in_flit[r][S]   = '0;
      assign r_out_ready[r][S] = 1'b1;
    end
  end

  always_comb begin
    cv_ready = 1'b0;
    for (int unsigned t = 0; t < NTILES; t++)
      if (32'(cv_tile) == t) cv_ready = t_cv_ready[t];
  end
  assign all_idle       = &t_idle;
  assign ev_or_stall    = |t_or;
  assign ev_start_stall = |t_st;
  assign ev_noc_block   = |t_nb;
endmodule
