// tb_neural_pim_chip: end-to-end test of the chip top on a reduced chip of
// 8 tiles behind a 2 x 1 concentrated mesh (2 crossbars per PE, one 4-lane
// NNADC per PE, 1024-word buffers); everything inside a tile keeps the
// paper's crossbar size, DAC width and precisions.
//
// Flow. Weights of tiles 1 and 6 are programmed through the host port.
// Inputs enter through the external link as flits and travel over the mesh
// to the tiles' buffers. Then, as two layers:
//   layer 1 (tile 1)
//     A  PE0+PE1, one kernel over both crossbars, sum over PEs, hard tanh,
//        result to tile 6's buffer (crosses the mesh);
//     B  PE0, ReLU, results leave the chip (tile number >= 8);
//     B2 PE0, same but 1/8 VDD NNADC range, also off-chip;
//     B3, B4 repeats of B2 (the router buffers absorb B's flits, so B4
//        is the window that waits for room in the result queue).
//   layer 2 (tile 6, issued after the chip is idle, reads A's result)
//     C  PE0, max-pool over two windows (C1 first, C2 last), off-chip;
//     L  PE0, LSTM element-wise stage, 1/2 VDD range, off-chip.
// The external output is held back for a while so that results pile up.
// Every off-chip flit and the word written by A are compared with the
// reference chain. Counted mechanisms, each of which must be non-zero:
// start stall, OR stall, NoC back-pressure, mode switches (activation or
// NNADC range change between consecutive windows of a tile), PE-sum
// windows, pooling windows, LSTM windows, mesh hops to another router.
module tb_neural_pim_chip;
  import npim_pkg::*;
  import tb_npim_model::*;
  localparam int NT = 8, X = 2, R = 128, C = 128, G = 8, WORDS = 1024;
  localparam int IW = X * R / BUS_BYTES;
  localparam int TA = 1, TB = 6;          // the two tiles used

  logic clk = 0, rst_n = 0;
  logic prog_en, prog_all; logic [9:0] prog_tile; logic [1:0] prog_pe; logic [0:0] prog_xbar;
  logic [6:0] prog_row; logic [2:0] prog_grp; logic [C-1:0] prog_data;
  logic cv_valid, cv_ready; logic [9:0] cv_tile; ctrl_vec_t cv;
  logic ht_in_valid, ht_in_ready, ht_out_valid, ht_out_ready;
  flit_t ht_in_flit, ht_out_flit;
  logic all_idle, ev_or_stall, ev_start_stall, ev_noc_block;

  neural_pim_chip #(.NTILES(NT), .CONC(4), .MESH_X(2), .MESH_Y(1), .NPE(4), .XBARS(X),
                    .ROWS(R), .COLS(C), .D(4), .NNADCS(1), .LANES(4), .WORDS(WORDS)) dut (
    .clk, .rst_n, .prog_en, .prog_tile, .prog_pe, .prog_xbar, .prog_row, .prog_grp, .prog_all,
    .prog_data, .cv_valid, .cv_tile, .cv, .cv_ready,
    .ht_in_valid, .ht_in_ready, .ht_in_flit, .ht_out_valid, .ht_out_ready, .ht_out_flit,
    .all_idle, .ev_or_stall, .ev_start_stall, .ev_noc_block
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_or = 0, n_start = 0, n_noc = 0, n_mode = 0, n_sum = 0, n_pool = 0, n_lstm = 0, n_hop = 0;
  int n_out = 0;

  initial begin
    #30000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference state: weights of the two tiles, bytes of their buffers
  logic [C-1:0] wref [2][4][X][R];
  logic [7:0]   mem  [2][WORDS * BUS_BYTES];
  // expected off-chip flits by address
  int           exp_cnt [64];
  logic [63:0]  exp_data [64];
  logic         exp_vld [64];

  always @(posedge clk) begin
    if (ev_or_stall) n_or++;
    if (ev_start_stall) n_start++;
    if (ev_noc_block) n_noc++;
    // a flit crossing from router 0 to router 1
    if (dut.r_out_valid[0][5] && dut.r_out_ready[0][5]) n_hop++;
  end

  // mode switches seen at the control vector port
  act_e last_act [NT]; adc_range_e last_rng [NT]; bit seen [NT];
  always @(posedge clk) if (rst_n && cv_valid && cv_ready) begin
    if (seen[cv_tile] && (last_act[cv_tile] != cv.act || last_rng[cv_tile] != cv.adc_range)) n_mode++;
    seen[cv_tile] = 1; last_act[cv_tile] = cv.act; last_rng[cv_tile] = cv.adc_range;
    if (cv.pe_sum) n_sum++;
    if (!(cv.pool_first && cv.pool_last)) n_pool++;
    if (cv.act == ACT_LSTM) n_lstm++;
  end

  // off-chip results
  always @(posedge clk) if (rst_n && ht_out_valid && ht_out_ready) begin
    int a;
    a = int'(ht_out_flit.addr);
    n_out++;
    checks++;
    if (a >= 64 || !exp_vld[a] || ht_out_flit.dst_tile < 10'(NT)) begin
      failures++; $display("unexpected flit dst %0d addr %0d", ht_out_flit.dst_tile, a);
    end else begin
      exp_cnt[a]++;
      if (ht_out_flit.data != exp_data[a]) begin
        failures++; $display("flit addr %0d: %h expected %h", a, ht_out_flit.data, exp_data[a]);
      end
    end
  end

  // NNADC codes of tile k (0: TA, 1: TB), PE p, inputs at word b
  function automatic void pe_codes(int k, int p, int b, int rng, output int code [X][G]);
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
              c = (mem[k][b * BUS_BYTES + x * R + r] >> (4 * s)) & 15;
              if (wref[k][p][x][r][16*g + j])     ap += c;
              if (wref[k][p][x][r][16*g + 8 + j]) an += c;
            end
            dv[j] = m_bl(ap, R, 4) - m_bl(an, R, 4);
          end
          v = m_nnsa(v, dv, 4);
        end
        code[x][g] = m_adc(v, rng);
      end
  endfunction

  function automatic ctrl_vec_t mk(logic [3:0] en, int b0, int b1, int kx, adc_range_e rng, act_e a,
                                   int zp, bit sum, bit pf, bit pl, int ob, int ot);
    ctrl_vec_t c;
    c = '0;
    c.pe_en = en; c.in_base0 = 16'(b0); c.in_base1 = 16'(b1);
    c.in_words = 11'(IW); c.xbars = 7'(X); c.kernel_xbars = 7'(kx);
    c.adc_range = rng; c.act = a; c.zero_point = 16'(zp); c.pe_sum = sum;
    c.pool_first = pf; c.pool_last = pl; c.out_base = 16'(ob); c.out_tile = 10'(ot);
    return c;
  endfunction

  task automatic send_cv(int t, ctrl_vec_t c);
    @(negedge clk);
    cv_valid = 1; cv_tile = 10'(t); cv = c;
    @(posedge clk); while (!cv_ready) @(posedge clk);
    @(negedge clk); cv_valid = 0;
  endtask

  task automatic expect_word(int a, int lanes [G]);
    for (int g = 0; g < G; g++) exp_data[a][8*g +: 8] = 8'(lanes[g]);
    exp_vld[a] = 1;
  endtask

  function automatic int hsig(int s); return m_su8(128 + 4 * s); endfunction
  function automatic int htanh(int s); return m_ss8(8 * s); endfunction

  initial begin
    int code [X][G], code2 [X][G];
    int lanes [G];
    prog_en = 0; prog_all = 0; prog_tile = 0; prog_pe = 0; prog_xbar = 0; prog_row = 0; prog_grp = 0;
    prog_data = '0; cv_valid = 0; cv_tile = 0; cv = '0;
    ht_in_valid = 0; ht_in_flit = '0; ht_out_ready = 1;
    for (int a = 0; a < 64; a++) begin exp_cnt[a] = 0; exp_vld[a] = 0; exp_data[a] = '0; end
    for (int t = 0; t < NT; t++) seen[t] = 0;
    #12 rst_n = 1;

    // ---- weights (PE0 and PE1 of both tiles) ----
    for (int k = 0; k < 2; k++)
      for (int p = 0; p < 2; p++)
        for (int x = 0; x < X; x++)
          for (int r = 0; r < R; r++) begin
            @(negedge clk);
            prog_en = 1; prog_all = 1; prog_tile = 10'(k ? TB : TA); prog_pe = 2'(p);
            prog_xbar = 1'(x); prog_row = 7'(r);
            prog_data = {$urandom, $urandom, $urandom, $urandom};
            for (int g = 0; g < G; g++) prog_data[16*g + 8 +: 8] &= 8'($urandom) & 8'($urandom) & 8'($urandom);
            wref[k][p][x][r] = prog_data;
          end
    @(negedge clk); prog_en = 0;

    // ---- inputs over the external link ----
    // tile TA: words 0..127 (A: PE0 0..31, PE1 32..63; B: 64..95; B2: 96..127)
    // tile TB: words 0..95 (C1, C2, L) and 480..511 (layer-2 input incl. A's result at 500)
    for (int k = 0; k < 2; k++)
      for (int i = 0; i < 128; i++) begin
        int w;
        w = (k == 1 && i >= 96) ? 480 + i - 96 : i;
        @(negedge clk);
        ht_in_valid = 1; ht_in_flit.dst_tile = 10'(k ? TB : TA); ht_in_flit.addr = 16'(w);
        ht_in_flit.data = {$urandom, $urandom};
        for (int j = 0; j < BUS_BYTES; j++) mem[k][w * BUS_BYTES + j] = ht_in_flit.data[8*j +: 8];
        @(posedge clk); while (!ht_in_ready) @(posedge clk);
      end
    @(negedge clk); ht_in_valid = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (dut.g_tile[TB].u_tile.u_buf.mem[481] != {mem[1][481*8+7], mem[1][481*8+6], mem[1][481*8+5], mem[1][481*8+4],
                                                  mem[1][481*8+3], mem[1][481*8+2], mem[1][481*8+1], mem[1][481*8]}) begin
      failures++; $display("input flit did not reach tile %0d", TB);
    end

    // ---- layer 1 expectations ----
    // A: tanh(sum over PE0/PE1 and both crossbars - 300) -> tile TB word 500
    for (int g = 0; g < G; g++) lanes[g] = 0;
    for (int p = 0; p < 2; p++) begin
      pe_codes(0, p, p * IW, 1, code);
      for (int g = 0; g < G; g++) lanes[g] += code[0][g] + code[1][g];
    end
    for (int g = 0; g < G; g++) mem[1][500 * BUS_BYTES + g] = 8'(m_act(3, lanes[g] - 300));
    // B: relu(code - 10), one beat per crossbar, off-chip at 10, 11
    pe_codes(0, 0, 64, 1, code);
    for (int x = 0; x < X; x++) begin
      for (int g = 0; g < G; g++) lanes[g] = m_act(1, code[x][g] - 10);
      expect_word(10 + x, lanes);
    end
    // B2: same layer, 1/8 VDD range, off-chip at 20, 21
    pe_codes(0, 0, 96, 2, code);
    for (int x = 0; x < X; x++) begin
      for (int g = 0; g < G; g++) lanes[g] = m_act(1, code[x][g] - 10);
      expect_word(20 + x, lanes);
      expect_word(24 + x, lanes);
      expect_word(28 + x, lanes);
    end

    ht_out_ready = 0;
    send_cv(TA, mk(4'b0011, 0, IW, 2, RANGE_QUARTER, ACT_TANH, 300, 1, 1, 1, 500, TB));
    send_cv(TA, mk(4'b0001, 64, 0, 1, RANGE_QUARTER, ACT_RELU, 10, 0, 1, 1, 10, 300));
    send_cv(TA, mk(4'b0001, 96, 0, 1, RANGE_EIGHTH, ACT_RELU, 10, 0, 1, 1, 20, 300));
    send_cv(TA, mk(4'b0001, 96, 0, 1, RANGE_EIGHTH, ACT_RELU, 10, 0, 1, 1, 24, 300));
    send_cv(TA, mk(4'b0001, 96, 0, 1, RANGE_EIGHTH, ACT_RELU, 10, 0, 1, 1, 28, 300));
    repeat (600) @(negedge clk);
    ht_out_ready = 1;
    while (!all_idle) @(negedge clk);
    repeat (10) @(negedge clk);
    // A's result in tile TB
    for (int g = 0; g < G; g++) begin
      checks++;
      if (dut.g_tile[TB].u_tile.u_buf.mem[500][8*g +: 8] != mem[1][500 * BUS_BYTES + g]) begin
        failures++; $display("A lane %0d: %0d expected %0d", g, dut.g_tile[TB].u_tile.u_buf.mem[500][8*g +: 8],
                             mem[1][500 * BUS_BYTES + g]);
      end
    end

    // ---- layer 2 expectations ----
    // C1 (words 480..511, first) and C2 (words 0..31, last): max over both, no activation
    pe_codes(1, 0, 480, 1, code);
    pe_codes(1, 0, 0, 1, code2);
    for (int x = 0; x < X; x++) begin
      for (int g = 0; g < G; g++) begin
        int a, b;
        a = m_ss8(code[x][g] - 50); b = m_ss8(code2[x][g] - 50);
        lanes[g] = (a > b ? a : b) & 255;
      end
      expect_word(32 + x, lanes);
    end
    // L (words 32..63): LSTM, two units per beat, fresh cell state
    pe_codes(1, 0, 32, 0, code);
    for (int x = 0; x < X; x++) begin
      for (int g = 0; g < G; g++) lanes[g] = 0;
      for (int u = 0; u < 2; u++) begin
        int ig, og, cg, cn;
        ig = hsig(code[x][4*u] - 60);
        og = hsig(code[x][4*u+2] - 60);
        cg = htanh(code[x][4*u+3] - 60);
        cn = 32'(16'((ig * cg) >>> 8));
        cn = int'($signed(16'(cn)));
        lanes[u] = ((og * m_ss8(cn)) >>> 8) & 255;
      end
      expect_word(40 + x, lanes);
    end
    send_cv(TB, mk(4'b0001, 480, 0, 1, RANGE_QUARTER, ACT_NONE, 50, 0, 1, 0, 32, 301));
    send_cv(TB, mk(4'b0001, 0, 0, 1, RANGE_QUARTER, ACT_NONE, 50, 0, 0, 1, 32, 301));
    send_cv(TB, mk(4'b0001, 32, 0, 1, RANGE_HALF, ACT_LSTM, 60, 0, 1, 1, 40, 302));
    while (!all_idle) @(negedge clk);
    repeat (10) @(negedge clk);

    for (int a = 0; a < 64; a++) if (exp_vld[a]) begin
      checks++;
      if (exp_cnt[a] != 1) begin failures++; $display("addr %0d seen %0d times", a, exp_cnt[a]); end
    end
    checks++; if (n_out != 12) begin failures++; $display("%0d off-chip flits, expected 12", n_out); end
    checks++; if (n_start == 0) begin failures++; $display("count zero: start stall"); end
    checks++; if (n_or == 0)    begin failures++; $display("count zero: OR stall"); end
    checks++; if (n_noc == 0)   begin failures++; $display("count zero: NoC back-pressure"); end
    checks++; if (n_mode == 0)  begin failures++; $display("count zero: mode switch"); end
    checks++; if (n_sum == 0)   begin failures++; $display("count zero: PE-sum window"); end
    checks++; if (n_pool == 0)  begin failures++; $display("count zero: pooling window"); end
    checks++; if (n_lstm == 0)  begin failures++; $display("count zero: LSTM window"); end
    checks++; if (n_hop == 0)   begin failures++; $display("count zero: mesh hop"); end
    $display("counts: start_stall=%0d or_stall=%0d noc_block=%0d mode_switch=%0d pe_sum=%0d pool=%0d lstm=%0d hop=%0d",
             n_start, n_or, n_noc, n_mode, n_sum, n_pool, n_lstm, n_hop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
