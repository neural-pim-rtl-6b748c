// tb_tile: one tile (4 PEs of 2 full-size crossbars, one 4-lane NNADC per
// PE, 1024-word buffer). Weights are programmed through the row/column
// decoders, inputs arrive as NoC flits, and four control vectors are queued
// at once so that the windows pipeline:
//   W0  all PEs, one crossbar per kernel, ReLU, results to the own buffer;
//   W1  all PEs, two crossbars per kernel, sum over PEs, hard sigmoid,
//       results sent to another tile over the NoC (held back for a while);
//   W2  PE0, ACT_NONE, first window of a max-pool group;
//   W3  PE0, ACT_NONE, last window of the group: pooled results stored.
// Every stored byte and every flit is compared with the reference chain
// (bitlines, NNS+A recurrence, NNADC, adder, post-processing). The run must
// show back-pressure from the NoC and a window waiting for the PEs.
module tb_tile;
  import npim_pkg::*;
  import tb_npim_model::*;
  localparam int NPE = 4, X = 2, R = 128, C = 128, G = 8, WORDS = 1024, ID = 3;
  localparam int IW = X * R / BUS_BYTES;   // IR words per PE

  logic clk = 0, rst_n = 0;
  logic prog_en, prog_all; logic [1:0] prog_pe; logic [0:0] prog_xbar; logic [6:0] prog_row;
  logic [2:0] prog_grp; logic [C-1:0] prog_data;
  logic cv_valid, cv_ready; ctrl_vec_t cv;
  logic noc_in_valid, noc_in_ready, noc_out_valid, noc_out_ready;
  flit_t noc_in_flit, noc_out_flit;
  logic idle, ev_or_stall, ev_start_stall, ev_noc_block;

  logic [C-1:0] wref [NPE][X][R];
  logic [7:0]   mem [WORDS * BUS_BYTES];   // reference buffer image (bytes)
  int checks = 0, failures = 0;
  int n_or = 0, n_start = 0, n_noc = 0, flits = 0;

  tile #(.NPE(NPE), .XBARS(X), .ROWS(R), .COLS(C), .D(4), .NNADCS(1), .LANES(4), .WORDS(WORDS)) dut (
    .clk, .rst_n, .tile_id(10'(ID)),
    .prog_en, .prog_pe, .prog_xbar, .prog_row, .prog_grp, .prog_all, .prog_data,
    .cv_valid, .cv_ready, .cv,
    .noc_in_valid, .noc_in_ready, .noc_in_flit, .noc_out_valid, .noc_out_ready, .noc_out_flit,
    .idle, .ev_or_stall, .ev_start_stall, .ev_noc_block
  );

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (ev_or_stall) n_or++;
    if (ev_start_stall) n_start++;
    if (ev_noc_block) n_noc++;
  end

  // per-crossbar NNADC codes for PE p reading inputs at word base `b`
  function automatic void pe_codes(int p, int b, int rng, output int code [X][G]);
    for (int x = 0; x < X; x++)
      for (int g = 0; g < G; g++) begin
        real v;
        v = 0.0;
        for (int s = 0; s < 2; s++) begin
          real dv [8];
          for (int j = 0; j < 8; j++) begin
            int unsigned ap, an;
            ap = 0; an = 0;
            for (int r = 0; r < R; r++) begin
              int unsigned c;
              c = (mem[b * BUS_BYTES + x * R + r] >> (4 * s)) & 15;
              if (wref[p][x][r][16*g + j])     ap += c;
              if (wref[p][x][r][16*g + 8 + j]) an += c;
            end
            dv[j] = m_bl(ap, R, 4) - m_bl(an, R, 4);
          end
          v = m_nnsa(v, dv, 4);
        end
        code[x][g] = m_adc(v, rng);
      end
  endfunction

  function automatic ctrl_vec_t mk(int w, logic [3:0] en, int kx, act_e a, int zp, bit sum,
                                   bit pf, bit pl, int ob, int ot);
    ctrl_vec_t c;
    c = '0;
    c.pe_en = en;
    c.in_base0 = 16'(w * 128 + 0 * IW); c.in_base1 = 16'(w * 128 + 1 * IW);
    c.in_base2 = 16'(w * 128 + 2 * IW); c.in_base3 = 16'(w * 128 + 3 * IW);
    c.in_words = 11'(IW); c.xbars = 7'(X); c.kernel_xbars = 7'(kx);
    c.adc_range = RANGE_QUARTER; c.act = a; c.zero_point = 16'(zp); c.pe_sum = sum;
    c.pool_first = pf; c.pool_last = pl; c.out_base = 16'(ob); c.out_tile = 10'(ot);
    return c;
  endfunction

  int exp_flit [G];
  // remote results of W1
  always @(posedge clk) if (rst_n && noc_out_valid && noc_out_ready) begin
    flits++;
    checks++;
    if (noc_out_flit.dst_tile != 10'd9 || noc_out_flit.addr != 16'd950) begin
      failures++; $display("flit header wrong: %0d %0d", noc_out_flit.dst_tile, noc_out_flit.addr);
    end
    for (int g = 0; g < G; g++) begin
      checks++;
      if (int'(noc_out_flit.data[8*g +: 8]) != exp_flit[g]) begin
        failures++; $display("flit lane %0d: %0d expected %0d", g, noc_out_flit.data[8*g +: 8], exp_flit[g]);
      end
    end
  end

  initial begin
    int code [X][G];
    int e0 [8][G];
    int pool [2][G];
    prog_en = 0; prog_all = 0; prog_pe = 0; prog_xbar = 0; prog_row = 0; prog_grp = 0; prog_data = '0;
    cv_valid = 0; cv = '0; noc_in_valid = 0; noc_in_flit = '0; noc_out_ready = 0;
    #12 rst_n = 1;
    // weights: whole rows, then one weight group rewritten through the column decoder
    for (int p = 0; p < NPE; p++)
      for (int x = 0; x < X; x++)
        for (int r = 0; r < R; r++) begin
          @(negedge clk);
          prog_en = 1; prog_all = 1; prog_pe = 2'(p); prog_xbar = 1'(x); prog_row = 7'(r);
          prog_data = {$urandom, $urandom, $urandom, $urandom};
          for (int g = 0; g < G; g++) prog_data[16*g + 8 +: 8] &= 8'($urandom) & 8'($urandom) & 8'($urandom);
          wref[p][x][r] = prog_data;
        end
    @(negedge clk);
    prog_all = 0; prog_pe = 2; prog_xbar = 1; prog_row = 7'd77; prog_grp = 3'd5;
    prog_data = {$urandom, $urandom, $urandom, $urandom};
    wref[2][1][77][80 +: 16] = prog_data[80 +: 16];
    @(negedge clk); prog_en = 0;
    // inputs for 4 windows x 4 PEs through the NoC port
    for (int w = 0; w < 4 * 128; w++) begin
      @(negedge clk);
      noc_in_valid = 1; noc_in_flit.dst_tile = 10'(ID); noc_in_flit.addr = 16'(w);
      noc_in_flit.data = {$urandom, $urandom};
      for (int k = 0; k < BUS_BYTES; k++) mem[w * BUS_BYTES + k] = noc_in_flit.data[8*k +: 8];
      @(posedge clk); while (!noc_in_ready) @(posedge clk);
    end
    @(negedge clk); noc_in_valid = 0;
    // expected results
    for (int p = 0; p < NPE; p++) begin
      pe_codes(p, 0 * 128 + p * IW, 1, code);
      for (int k = 0; k < X; k++) for (int g = 0; g < G; g++) e0[k * NPE + p][g] = m_act(1, code[k][g] - 20);
    end
    for (int g = 0; g < G; g++) exp_flit[g] = 0;
    for (int p = 0; p < NPE; p++) begin
      pe_codes(p, 1 * 128 + p * IW, 1, code);
      for (int g = 0; g < G; g++) exp_flit[g] += code[0][g] + code[1][g];
    end
    for (int g = 0; g < G; g++) exp_flit[g] = m_act(2, exp_flit[g] - 200);
    for (int w = 2; w < 4; w++) begin
      pe_codes(0, w * 128, 1, code);
      for (int k = 0; k < X; k++) for (int g = 0; g < G; g++) begin
        int v;
        v = m_ss8(code[k][g] - 40);
        if (w == 2 || v > pool[k][g]) pool[k][g] = v;
      end
    end
    // queue the four windows
    for (int w = 0; w < 4; w++) begin
      @(negedge clk);
      cv_valid = 1;
      case (w)
        0: cv = mk(0, 4'b1111, 1, ACT_RELU, 20, 0, 1, 1, 900, ID);
        1: cv = mk(1, 4'b1111, 2, ACT_SIGMOID, 200, 1, 1, 1, 950, 9);
        2: cv = mk(2, 4'b0001, 1, ACT_NONE, 40, 0, 1, 0, 980, ID);
        default: cv = mk(3, 4'b0001, 1, ACT_NONE, 40, 0, 0, 1, 980, ID);
      endcase
      @(posedge clk); while (!cv_ready) @(posedge clk);
    end
    @(negedge clk); cv_valid = 0;
    // hold the NoC back well after the remote result appears
    while (!noc_out_valid) @(negedge clk);
    repeat (400) @(negedge clk);
    noc_out_ready = 1;
    @(negedge clk);
    while (!idle) @(negedge clk);
    repeat (5) @(negedge clk);
    // W0 results
    for (int n = 0; n < 8; n++)
      for (int g = 0; g < G; g++) begin
        checks++;
        if (int'(dut.u_buf.mem[900 + n][8*g +: 8]) != e0[n][g]) begin
          failures++; $display("W0 beat %0d lane %0d: %0d expected %0d", n, g, dut.u_buf.mem[900 + n][8*g +: 8], e0[n][g]);
        end
      end
    // pooled W2/W3 results
    for (int n = 0; n < 2; n++)
      for (int g = 0; g < G; g++) begin
        checks++;
        if (int'(dut.u_buf.mem[980 + n][8*g +: 8]) != (pool[n][g] & 255)) begin
          failures++; $display("pool beat %0d lane %0d: %0d expected %0d", n, g, dut.u_buf.mem[980 + n][8*g +: 8], pool[n][g] & 255);
        end
      end
    checks++; if (flits != 1) begin failures++; $display("%0d flits sent, expected 1", flits); end
    checks++; if (n_noc == 0)   begin failures++; $display("no NoC back-pressure seen"); end
    checks++; if (n_start == 0) begin failures++; $display("no window waited for the PEs"); end
    $display("tile events: or_stall=%0d start_stall=%0d noc_block=%0d", n_or, n_start, n_noc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
