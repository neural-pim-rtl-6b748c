// tb_pe_adder: the adder reads a reference OR image and must emit, per run
// of kernel_xbars crossbars, the lane-wise sums with the right beat index
// and last flag, under random output back-pressure. Also checks that the
// walk takes one clock per crossbar when never back-pressured.
module tb_pe_adder;
  import npim_pkg::*;
  localparam int X = 16, G = 8;
  logic clk = 0, rst_n = 0, start, busy, out_valid, out_ready, out_last;
  logic [6:0] xbars, kx;
  logic [3:0] or_raddr;
  logic [G-1:0][7:0] or_rdata;
  logic [G-1:0][SUM_W-1:0] out_sums;
  logic [7:0] out_idx;
  logic [7:0] orm [X][G];
  int checks = 0, failures = 0;
  int bp;

  pe_adder #(.XBARS(X), .GROUPS(G)) dut (
    .clk, .rst_n, .start, .xbars, .kernel_xbars(kx), .or_raddr, .or_rdata,
    .busy, .out_valid, .out_ready, .out_sums, .out_idx, .out_last
  );

  always #5 clk = ~clk;
  always_comb for (int g = 0; g < G; g++) or_rdata[g] = orm[or_raddr][g];
  always @(negedge clk) out_ready = (bp == 0) ? 1'b1 : 1'($urandom % 2);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int nx, int k, int backp);
    int beats, cyc;
    bp = backp;
    for (int x = 0; x < X; x++) for (int g = 0; g < G; g++) orm[x][g] = 8'($urandom);
    @(negedge clk);
    start = 1; xbars = 7'(nx); kx = 7'(k);
    @(negedge clk);
    start = 0;
    beats = 0; cyc = 1;
    while (busy) begin
      @(posedge clk);
      cyc++;
      if (out_valid && out_ready) begin
        for (int g = 0; g < G; g++) begin
          int e;
          e = 0;
          for (int m = 0; m < k; m++) e += orm[beats*k + m][g];
          checks++;
          if (int'(out_sums[g]) != e) begin
            failures++; $display("beat %0d g%0d: %0d expected %0d", beats, g, out_sums[g], e);
          end
        end
        checks++;
        if (int'(out_idx) != beats || out_last != (beats == nx / k - 1)) begin
          failures++; $display("beat %0d: idx %0d last %0d", beats, out_idx, out_last);
        end
        beats++;
      end
      #1;
    end
    checks++;
    if (beats != nx / k) begin failures++; $display("got %0d beats, expected %0d", beats, nx / k); end
    if (backp == 0) begin
      checks++;
      if (cyc != nx + 2) begin failures++; $display("took %0d clocks for %0d crossbars", cyc, nx); end
    end
  endtask

  initial begin
    start = 0; xbars = 0; kx = 1; bp = 0;
    #12 rst_n = 1;
    run(16, 1, 0);
    run(16, 4, 0);
    run(12, 3, 1);
    run(16, 16, 1);
    run(8, 2, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
