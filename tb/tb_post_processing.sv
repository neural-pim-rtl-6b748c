// tb_post_processing: checks each activation, accumulation over several
// beats, max pooling across windows, the LSTM cell update over two time
// steps, the win_done pulse and back-pressure, against reference
// arithmetic written out here.
module tb_post_processing;
  import npim_pkg::*;
  localparam int G = 8;
  logic clk = 0, rst_n = 0;
  act_e act;
  logic [15:0] zp;
  logic [2:0] acc_n;
  logic pool_first, pool_last, in_valid, in_ready, in_last, out_valid, out_ready, win_done;
  logic [G-1:0][SUM_W-1:0] in_sums;
  logic [7:0] in_idx, out_idx;
  logic [G-1:0][7:0] out_data;
  int checks = 0, failures = 0;
  int dones = 0;

  post_processing #(.GROUPS(G)) dut (
    .clk, .rst_n, .act, .zero_point(zp), .acc_n, .pool_first, .pool_last,
    .in_valid, .in_ready, .in_sums, .in_idx, .in_last,
    .out_valid, .out_ready, .out_data, .out_idx, .win_done
  );

  always #5 clk = ~clk;
  always @(posedge clk) if (win_done) dones++;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int su8(int v); return v < 0 ? 0 : v > 255 ? 255 : v; endfunction
  function automatic int ss8(int v); return v < -128 ? -128 : v > 127 ? 127 : v; endfunction
  function automatic int f_act(act_e a, int s);
    case (a)
      ACT_RELU:    return su8(s);
      ACT_SIGMOID: return su8(128 + 4 * s);
      ACT_TANH:    return ss8(8 * s) & 255;
      default:     return ss8(s) & 255;
    endcase
  endfunction

  // send one beat; returns when accepted
  task automatic send(logic [G-1:0][SUM_W-1:0] s, int idx, bit last);
    @(negedge clk);
    in_valid = 1; in_sums = s; in_idx = 8'(idx); in_last = last;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    #1 in_valid = 0;
  endtask

  task automatic expect_out(int idx, int e [G]);
    int n;
    n = 0;
    while (!(out_valid && out_ready)) begin @(posedge clk); #1; n++; if (n > 20) break; end
    checks++;
    if (!out_valid || int'(out_idx) != idx) begin failures++; $display("no output for beat %0d", idx); end
    for (int g = 0; g < G; g++) begin
      checks++;
      if (int'(out_data[g]) != e[g]) begin
        failures++; $display("act %s beat %0d lane %0d: %0d expected %0d", act.name(), idx, g, out_data[g], e[g]);
      end
    end
    @(posedge clk); #1;
  endtask

  initial begin
    logic [G-1:0][SUM_W-1:0] s, s2;
    int e [G];
    int cprev [2];
    act = ACT_RELU; zp = 0; acc_n = 1; pool_first = 1; pool_last = 1;
    in_valid = 0; in_sums = '0; in_idx = 0; in_last = 0; out_ready = 1;
    #12 rst_n = 1;
    // plain activations
    for (int a = 0; a < 4; a++) begin
      act = act_e'(a); zp = 16'd300;
      for (int t = 0; t < 5; t++) begin
        for (int g = 0; g < G; g++) begin
          s[g] = SUM_W'($urandom % 700);
          e[g] = f_act(act, int'(s[g]) - 300);
        end
        send(s, t, t == 4);
        #1 expect_out(t, e);
      end
    end
    // accumulation of 3 beats (tile-level sum over PEs) with back-pressure
    act = ACT_RELU; zp = 16'd100; acc_n = 3;
    for (int g = 0; g < G; g++) e[g] = 0;
    for (int k = 0; k < 3; k++) begin
      for (int g = 0; g < G; g++) begin s[g] = SUM_W'($urandom % 200); e[g] += s[g]; end
      send(s, 7, 0);
    end
    for (int g = 0; g < G; g++) e[g] = su8(e[g] - 100);
    out_ready = 0; repeat (3) @(posedge clk); #1;
    checks++; if (!out_valid || in_ready) begin failures++; $display("back-pressure not held"); end
    out_ready = 1;
    expect_out(7, e);
    acc_n = 1;
    // max pooling over three windows, beat 2
    act = ACT_NONE; zp = 16'd128;
    for (int g = 0; g < G; g++) e[g] = -1000;
    for (int w = 0; w < 3; w++) begin
      pool_first = (w == 0); pool_last = (w == 2);
      for (int g = 0; g < G; g++) begin
        int v;
        s[g] = SUM_W'($urandom % 256);
        v = ss8(int'(s[g]) - 128);
        if (v > e[g]) e[g] = v;
      end
      send(s, 2, 1);
      if (w < 2) begin
        repeat (2) @(posedge clk); #1;
        checks++; if (out_valid) begin failures++; $display("pooling emitted early"); end
      end
    end
    for (int g = 0; g < G; g++) e[g] &= 255;
    expect_out(2, e);
    // LSTM: two time steps on beat 5, two hidden units
    act = ACT_LSTM; zp = 16'd64; pool_last = 1;
    cprev[0] = 0; cprev[1] = 0;
    for (int step = 0; step < 2; step++) begin
      pool_first = (step == 0);
      for (int g = 0; g < G; g++) s[g] = SUM_W'($urandom % 128);
      for (int g = 0; g < G; g++) e[g] = 0;
      for (int u = 0; u < 2; u++) begin
        int ig, fg, og, cg, c, hc;
        ig = su8(128 + 4 * (int'(s[4*u])   - 64));
        fg = su8(128 + 4 * (int'(s[4*u+1]) - 64));
        og = su8(128 + 4 * (int'(s[4*u+2]) - 64));
        cg = ss8(8 * (int'(s[4*u+3]) - 64));
        c  = ((fg * cprev[u]) >>> 8) + ((ig * cg) >>> 8);
        cprev[u] = c;
        hc = ss8(c);
        e[u] = ((og * hc) >>> 8) & 255;
      end
      send(s, 5, 0);
      #1 expect_out(5, e);
    end
    checks++;
    if (dones != 7) begin failures++; $display("win_done pulses: %0d, expected 7", dones); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
