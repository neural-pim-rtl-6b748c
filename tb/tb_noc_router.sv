// tb_noc_router: a router at (1, 1) of a 3x3 c-mesh (36 tiles) receives
// random flits on all ports under random output back-pressure. Every flit
// must leave on the port dimension-ordered routing selects, unchanged,
// exactly once.
module tb_noc_router;
  import npim_pkg::*;
  localparam int CONC = 4, NP = 8, MX = 3, NT = 36;
  logic clk = 0, rst_n = 0;
  logic [NP-1:0] in_valid, in_ready, out_valid, out_ready;
  flit_t [NP-1:0] in_flit, out_flit;
  flit_t exp_q [NP][$];
  int checks = 0, failures = 0, received = 0, sent = 0;

  noc_router #(.CONC(CONC), .MESH_X(MX), .NTILES(NT), .RX(1), .RY(1)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int exp_port(int dst);
    int r, x, y;
    if (dst >= NT) begin r = 0; end else r = dst / CONC;
    x = r % MX; y = r / MX;
    if (x > 1) return CONC;
    if (x < 1) return CONC + 1;
    if (y > 1) return CONC + 2;
    if (y < 1) return CONC + 3;
    return dst % CONC;
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < NP; o++)
      if (out_valid[o] && out_ready[o]) begin
        int hit;
        hit = -1;
        // must match the oldest outstanding flit from some input for this port
        foreach (exp_q[o][k]) if (hit < 0 && exp_q[o][k] == out_flit[o]) hit = k;
        checks++;
        if (hit < 0) begin failures++; $display("port %0d: unexpected flit %h", o, out_flit[o]); end
        else exp_q[o].delete(hit);
        received++;
      end
    for (int i = 0; i < NP; i++)
      if (in_valid[i] && in_ready[i]) begin
        exp_q[exp_port(int'(in_flit[i].dst_tile))].push_back(in_flit[i]);
        sent++;
      end
  end

  always @(negedge clk) begin
    out_ready = NP'($urandom);
    if (sent < 400)
      for (int i = 0; i < NP; i++) begin
        if (!in_valid[i] || in_ready[i]) begin
          in_valid[i] = 1'($urandom);
          in_flit[i].dst_tile = 10'($urandom % (NT + 4));
          in_flit[i].addr = 16'($urandom);
          in_flit[i].data = {$urandom, $urandom};
        end
      end
    else in_valid = '0;
  end

  initial begin
    in_valid = '0; in_flit = '0; out_ready = '0;
    #12 rst_n = 1;
    wait (sent >= 400);
    repeat (200) @(posedge clk);
    for (int o = 0; o < NP; o++) begin
      checks++;
      if (exp_q[o].size() != 0) begin failures++; $display("port %0d: %0d flits lost", o, exp_q[o].size()); end
    end
    checks++;
    if (received != sent) begin failures++; $display("sent %0d received %0d", sent, received); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
