// tb_global_buffer: simultaneous reads and writes on the two ports of the
// buffer, checking read data one clock after the request.
module tb_global_buffer;
  import npim_pkg::*;
  localparam int WORDS = 256;
  logic clk = 0, re, we;
  logic [7:0] raddr, waddr;
  logic [BUS_W-1:0] rdata, wdata;
  logic [BUS_W-1:0] ref_mem [WORDS];
  int checks = 0, failures = 0;

  global_buffer #(.WORDS(WORDS)) dut (.clk, .re, .raddr, .rdata, .we, .waddr, .wdata);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    re = 0; we = 0; raddr = 0; waddr = 0; wdata = '0;
    for (int w = 0; w < WORDS; w++) begin
      @(negedge clk);
      we = 1; waddr = 8'(w); wdata = {$urandom, $urandom}; ref_mem[w] = wdata;
    end
    for (int t = 0; t < 300; t++) begin
      logic [BUS_W-1:0] e;
      @(negedge clk);
      re = 1; raddr = 8'($urandom);
      we = 1; waddr = 8'($urandom); wdata = {$urandom, $urandom};
      if (waddr == raddr) waddr = waddr + 8'd1;
      e = ref_mem[raddr];
      ref_mem[waddr] = wdata;
      @(posedge clk); #1;
      checks++;
      if (rdata !== e) begin failures++; $display("read %0d: %h expected %h", raddr, rdata, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
