// noc_router: router of the concentrated-mesh (c-mesh) network-on-chip.
//
// Each router serves CONC adjacent tiles (local ports 0..CONC-1) and links
// to its mesh neighbours: port CONC = east (x+1), CONC+1 = west (x-1),
// CONC+2 = north (y+1), CONC+3 = south (y-1). Packets are single flits
// (flit_t: destination tile, buffer word address, one buffer word). Routing
// is dimension-ordered (X first, then Y): the destination router is
// dst_tile / CONC at (r % MESH_X, r / MESH_X), the local port dst_tile %
// CONC. A destination tile number of NTILES or above means "off chip" and is
// routed to the west port of router (0, 0), where the chip's external link
// attaches. Each input has a 2-flit FIFO; each output grants one input per
// clock in round-robin order. All ports use valid/ready; a flit moves when
// both are high. Input-to-output latency is one clock (the FIFO), and
// in_ready depends only on FIFO occupancy, so chained routers form no
// combinational loop.
//
// The paper adopts a c-mesh with routers shared among adjacent tiles and
// takes the router design from prior work; flit format, routing, buffering
// and arbitration here are this design's choices.
module noc_router
  import npim_pkg::*;
#(
  parameter int unsigned CONC   = 4,
  parameter int unsigned MESH_X = 10,
  parameter int unsigned NTILES = 280,
  parameter int unsigned RX     = 0,
  parameter int unsigned RY     = 0,
  localparam int unsigned NP    = CONC + 4,
  localparam int unsigned PW    = $clog2(NP)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic  [NP-1:0] in_valid,
  output logic  [NP-1:0] in_ready,
  input  flit_t [NP-1:0] in_flit,
  output logic  [NP-1:0] out_valid,
  input  logic  [NP-1:0] out_ready,
  output flit_t [NP-1:0] out_flit
);
  localparam int unsigned E = CONC, W = CONC + 1, N = CONC + 2, S = CONC + 3;

  flit_t   fifo [NP][2];
  logic    [1:0] cnt [NP];
  logic    rd [NP];
  logic    [NP-1:0] pop;
  logic    [PW-1:0] route [NP];
  logic    [PW-1:0] rr [NP];

  function automatic logic [PW-1:0] route_of(flit_t f);
    int unsigned r, dx, dy;
    logic [PW-1:0] lp;
    if (32'(f.dst_tile) >= NTILES) begin
      r = 0; lp = PW'(W);
    end else begin
      r = 32'(f.dst_tile) / CONC; lp = PW'(32'(f.dst_tile) % CONC);
    end
    dx = r % MESH_X; dy = r / MESH_X;
    if (dx != RX) return (dx > RX) ? PW'(E) : PW'(W);
    if (dy != RY) return (dy > RY) ? PW'(N) : PW'(S);
    return lp;
  endfunction

  always_comb begin
    for (int unsigned i = 0; i < NP; i++) begin
      in_ready[i] = (cnt[i] < 2'd2);
      route[i]    = route_of(fifo[i][rd[i]]);
    end
  end

  // round-robin output arbitration
  always_comb begin
    pop = '0;
    for (int unsigned o = 0; o < NP; o++) begin
      logic found;
      found = 1'b0;
      out_valid[o] = 1'b0;
      out_flit[o]  = fifo[0][rd[0]];
      for (int unsigned k = 0; k < NP; k++) begin
        int unsigned i;
        i = (32'(rr[o]) + k) % NP;
        if (!found && cnt[i] != 0 && route[i] == PW'(o)) begin
          found = 1'b1;
          out_valid[o] = 1'b1;
          out_flit[o]  = fifo[i][rd[i]];
          pop[i]       = out_ready[o];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < NP; i++) begin
        cnt[i] <= '0; rd[i] <= 1'b0; rr[i] <= '0;
      end
    end else begin
      for (int unsigned i = 0; i < NP; i++) begin
        logic push;
        push = in_valid[i] && in_ready[i];
        if (push) fifo[i][rd[i] ^ (cnt[i] != 0)] <= in_flit[i];
        if (pop[i]) rd[i] <= ~rd[i];
        cnt[i] <= cnt[i] + 2'(push) - 2'(pop[i]);
      end
      for (int unsigned o = 0; o < NP; o++)
        for (int unsigned i = 0; i < NP; i++)
          if (pop[i] && route[i] == PW'(o)) rr[o] <= PW'((i + 1) % NP);
    end
  end

  for (genvar i = 0; i < NP; i++) begin : g_chk
    a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) cnt[i] <= 2'd2);
  end
endmodule
