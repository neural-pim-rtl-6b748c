// tb_input_register: fills a small IR with random inputs and checks every
// DAC code of both 4-bit slices (LSB slice first).
module tb_input_register;
  import npim_pkg::*;
  localparam int X = 2, R = 16, D = 4, WORDS = X * R / BUS_BYTES;
  logic clk = 0, we;
  logic [$clog2(WORDS)-1:0] waddr;
  logic [BUS_W-1:0] wdata;
  logic [0:0] slice;
  logic [X-1:0][R-1:0][D-1:0] wl_code;
  logic [7:0] ref_mem [X*R];
  int checks = 0, failures = 0;

  input_register #(.XBARS(X), .ROWS(R), .D(D)) dut (.clk, .we, .waddr, .wdata, .slice, .wl_code);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = '0; wdata = '0; slice = 0;
    for (int rep = 0; rep < 3; rep++) begin
      for (int w = 0; w < WORDS; w++) begin
        @(negedge clk);
        we = 1; waddr = $clog2(WORDS)'(w); wdata = {$urandom, $urandom};
        for (int k = 0; k < BUS_BYTES; k++) ref_mem[w*BUS_BYTES + k] = wdata[8*k +: 8];
      end
      @(negedge clk); we = 0;
      for (int s = 0; s < 2; s++) begin
        slice = 1'(s); #1;
        for (int x = 0; x < X; x++)
          for (int r = 0; r < R; r++) begin
            checks++;
            if (wl_code[x][r] !== ref_mem[x*R + r][4*s +: 4]) begin
              failures++;
              $display("x%0d r%0d s%0d: %h expected %h", x, r, s, wl_code[x][r], ref_mem[x*R + r][4*s +: 4]);
            end
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
