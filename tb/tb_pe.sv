// tb_pe: one PE with 4 full-size crossbars and one 5-lane NNADC. Programs
// random signed weights, fills the IR with random inputs and runs three
// windows (kernels of 2 crossbars, all three NNADC ranges). Each result is
// compared with the reference chain bitline -> NNS+A recurrence -> NNADC ->
// sum over the kernel's crossbars. Checks the stage-1 latency of
// 2 input cycles x 8 clocks + 1, and holds the result stream to force a
// conversion to wait for the OR (or_stall must be seen).
module tb_pe;
  import npim_pkg::*;
  import tb_npim_model::*;
  localparam int X = 4, R = 128, C = 128, G = 8, KX = 2;
  logic clk = 0, rst_n = 0;
  logic prog_en; logic [1:0] prog_xbar; logic [R-1:0] prog_row_sel; logic [C-1:0] prog_col_mask, prog_data;
  logic ir_we; logic [5:0] ir_waddr; logic [BUS_W-1:0] ir_wdata;
  logic start, can_start, s1_busy, out_valid, out_ready, out_last, or_stall;
  logic [6:0] cfg_xbars, cfg_kx; adc_range_e cfg_range;
  logic [G-1:0][SUM_W-1:0] out_sums; logic [7:0] out_idx;
  logic [C-1:0] wref [X][R];
  logic [7:0] inref [X][R];
  int exp_sums [3][X/KX][G];
  int checks = 0, failures = 0, stalls = 0;

  pe #(.XBARS(X), .ROWS(R), .COLS(C), .D(4), .NNADCS(1), .LANES(5)) dut (
    .clk, .rst_n, .prog_en, .prog_xbar, .prog_row_sel, .prog_col_mask, .prog_data,
    .ir_we, .ir_waddr, .ir_wdata, .start, .cfg_xbars, .cfg_kernel_xbars(cfg_kx), .cfg_range,
    .can_start, .s1_busy, .out_valid, .out_ready, .out_sums, .out_idx, .out_last, .or_stall
  );

  always #5 clk = ~clk;
  always @(posedge clk) if (or_stall) stalls++;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void model(int w, int r);
    for (int k = 0; k < X / KX; k++) for (int g = 0; g < G; g++) exp_sums[w][k][g] = 0;
    for (int x = 0; x < X; x++)
      for (int g = 0; g < G; g++) begin
        real v;
        v = 0.0;
        for (int s = 0; s < 2; s++) begin
          real dv [8];
          for (int j = 0; j < 8; j++) begin
            int unsigned ap, an;
            ap = 0; an = 0;
            for (int row = 0; row < R; row++) begin
              int unsigned code;
              code = (inref[x][row] >> (4 * s)) & 15;
              if (wref[x][row][16*g + j])     ap += code;
              if (wref[x][row][16*g + 8 + j]) an += code;
            end
            dv[j] = m_bl(ap, R, 4) - m_bl(an, R, 4);
          end
          v = m_nnsa(v, dv, 4);
        end
        exp_sums[w][x / KX][g] += m_adc(v, r);
      end
  endfunction

  task automatic load_inputs();
    for (int w = 0; w < X * R / BUS_BYTES; w++) begin
      @(negedge clk);
      ir_we = 1; ir_waddr = 6'(w);
      for (int k = 0; k < BUS_BYTES; k++) begin
        logic [7:0] b;
        b = 8'($urandom);
        ir_wdata[8*k +: 8] = b;
        inref[(w*BUS_BYTES + k) / R][(w*BUS_BYTES + k) % R] = b;
      end
    end
    @(negedge clk); ir_we = 0;
  endtask

  int got [3];
  int win_out;
  // result checker
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    for (int g = 0; g < G; g++) begin
      checks++;
      if (int'(out_sums[g]) != exp_sums[win_out][out_idx][g]) begin
        failures++;
        $display("window %0d kernel %0d g%0d: %0d expected %0d", win_out, out_idx, g, out_sums[g], exp_sums[win_out][out_idx][g]);
      end
    end
    got[win_out]++;
    if (out_last) win_out++;
  end

  initial begin
    int lat;
    prog_en = 0; prog_xbar = 0; prog_row_sel = '0; prog_col_mask = '0; prog_data = '0;
    ir_we = 0; ir_waddr = 0; ir_wdata = '0; start = 0; cfg_xbars = X; cfg_kx = KX; cfg_range = RANGE_HALF;
    out_ready = 1; win_out = 0; got = '{0, 0, 0};
    #12 rst_n = 1;
    // program weights
    for (int x = 0; x < X; x++)
      for (int r = 0; r < R; r++) begin
        @(negedge clk);
        prog_en = 1; prog_xbar = 2'(x); prog_row_sel = '0; prog_row_sel[r] = 1'b1; prog_col_mask = '1;
        prog_data = {$urandom, $urandom, $urandom, $urandom};
        for (int g = 0; g < G; g++)   // W^N bits sparser than W^P bits: mostly positive weights
          prog_data[16*g + 8 +: 8] &= 8'($urandom) & 8'($urandom) & 8'($urandom);
        wref[x][r] = prog_data;
      end
    @(negedge clk); prog_en = 0;
    for (int w = 0; w < 3; w++) begin
      load_inputs();
      cfg_range = adc_range_e'(w);
      model(w, w);
      while (!can_start) @(negedge clk);
      if (w == 1) out_ready = 0;     // block window 1's results
      start = 1;
      @(negedge clk); start = 0;
      lat = 0;
      while (s1_busy) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 2 * G + 1) begin failures++; $display("stage 1 took %0d clocks, expected %0d", lat, 2 * G + 1); end
      if (w == 2) begin
        repeat (40) @(negedge clk);
        out_ready = 1;
      end
    end
    while (win_out < 3) @(negedge clk);
    for (int w = 0; w < 3; w++) begin
      checks++;
      if (got[w] != X / KX) begin failures++; $display("window %0d: %0d beats", w, got[w]); end
    end
    checks++;
    if (stalls == 0) begin failures++; $display("conversion never waited for the OR"); end
    $display("PE: or_stall clocks=%0d, window 0 kernel 0 sums %0d %0d %0d, window 2 %0d %0d", stalls, exp_sums[0][0][0], exp_sums[0][0][1], exp_sums[0][1][2], exp_sums[2][0][0], exp_sums[2][1][3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
