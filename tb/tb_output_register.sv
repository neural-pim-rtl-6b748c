// tb_output_register: multi-lane random writes, then row reads of all
// crossbars compared with a reference copy.
module tb_output_register;
  localparam int X = 8, G = 8, WL = 5, N = X * G;
  logic clk = 0;
  logic [WL-1:0] we;
  logic [WL-1:0][$clog2(N)-1:0] widx;
  logic [WL-1:0][7:0] wdata;
  logic [$clog2(X)-1:0] raddr;
  logic [G-1:0][7:0] rdata;
  logic [7:0] ref_mem [N];
  int checks = 0, failures = 0;

  output_register #(.XBARS(X), .GROUPS(G), .WL(WL)) dut (.clk, .we, .widx, .wdata, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = '0; widx = '0; wdata = '0; raddr = '0;
    // fill everything, WL entries per clock
    for (int b = 0; b < N; b += WL) begin
      @(negedge clk);
      for (int l = 0; l < WL; l++) begin
        we[l] = (b + l < N); widx[l] = $clog2(N)'(b + l); wdata[l] = 8'($urandom);
        if (b + l < N) ref_mem[b + l] = wdata[l];
      end
    end
    // random sparse writes on distinct lanes
    for (int t = 0; t < 30; t++) begin
      @(negedge clk);
      for (int l = 0; l < WL; l++) begin
        int unsigned i;
        i = ($urandom % (N / WL)) * WL + l;
        we[l] = 1'($urandom); widx[l] = $clog2(N)'(i); wdata[l] = 8'($urandom);
        if (we[l]) ref_mem[i] = wdata[l];
      end
    end
    @(negedge clk); we = '0;
    for (int x = 0; x < X; x++) begin
      raddr = $clog2(X)'(x); #1;
      for (int g = 0; g < G; g++) begin
        checks++;
        if (rdata[g] !== ref_mem[x*G + g]) begin
          failures++;
          $display("x%0d g%0d: %0d expected %0d", x, g, rdata[g], ref_mem[x*G + g]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
