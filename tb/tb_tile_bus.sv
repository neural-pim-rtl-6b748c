// tb_tile_bus: checks the downstream IR write demultiplexing and the strict
// rotation of upstream grants over the enabled PEs (PEs become valid at
// random times), the last flag and that disabled PEs are never granted.
module tb_tile_bus;
  import npim_pkg::*;
  localparam int NPE = 4, G = 8;
  logic clk = 0, rst_n = 0;
  logic dn_valid; logic [1:0] dn_pe; logic [9:0] dn_addr; logic [BUS_W-1:0] dn_data;
  logic [NPE-1:0] ir_we; logic [9:0] ir_waddr; logic [BUS_W-1:0] ir_wdata;
  logic [NPE-1:0] pe_en, pe_valid, pe_ready, pe_last;
  logic [NPE-1:0][G-1:0][SUM_W-1:0] pe_sums;
  logic [NPE-1:0][7:0] pe_idx;
  logic up_valid, up_ready, up_last;
  logic [G-1:0][SUM_W-1:0] up_sums;
  logic [7:0] up_idx, up_seq;
  int checks = 0, failures = 0;
  int sent [NPE];

  tile_bus #(.NPE(NPE), .GROUPS(G), .IRW(10)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // PE models: BEATS beats each, valid after a random delay
  localparam int BEATS = 5;
  always @(posedge clk) begin
    for (int p = 0; p < NPE; p++)
      if (pe_valid[p] && pe_ready[p]) begin
        sent[p]++;
        pe_valid[p] <= 1'b0;
      end else if (!pe_valid[p] && pe_en[p] && sent[p] < BEATS && ($urandom % 3 == 0)) begin
        pe_valid[p] <= 1'b1;
        for (int g = 0; g < G; g++) pe_sums[p][g] <= SUM_W'(p * 1000 + sent[p] * 10 + g);
        pe_idx[p]  <= 8'(sent[p]);
        pe_last[p] <= (sent[p] == BEATS - 1);
      end
  end

  initial begin
    int order [$];
    dn_valid = 0; dn_pe = 0; dn_addr = 0; dn_data = '0;
    pe_en = '0; pe_valid = '0; pe_last = '0; pe_sums = '0; pe_idx = '0; up_ready = 1;
    for (int p = 0; p < NPE; p++) sent[p] = 0;
    #12 rst_n = 1;
    // downstream
    for (int t = 0; t < 16; t++) begin
      @(negedge clk);
      dn_valid = 1'($urandom); dn_pe = 2'($urandom); dn_addr = 10'($urandom); dn_data = {$urandom, $urandom};
      #1;
      checks++;
      if (ir_we !== (dn_valid ? (4'b1 << dn_pe) : 4'b0) || ir_waddr !== dn_addr || ir_wdata !== dn_data) begin
        failures++; $display("downstream demux wrong");
      end
    end
    dn_valid = 0;
    // upstream with PEs 0, 2, 3 enabled
    for (int round = 0; round < 2; round++) begin
      int lastp, n;
      @(negedge clk);
      for (int p = 0; p < NPE; p++) sent[p] = 0;
      pe_en = (round == 0) ? 4'b1101 : 4'b0110;
      lastp = (round == 0) ? 3 : 2;
      n = 0;
      while (n < BEATS * $countones(pe_en)) begin
        @(posedge clk);
        up_ready <= 1'($urandom % 4 != 0);
        if (up_valid && up_ready) begin
          int p;
          p = up_sums[0] / 1000;
          checks++;
          if (!pe_en[p]) begin failures++; $display("disabled PE %0d granted", p); end
          order.push_back(p);
          checks++;
          if (int'(up_idx) != n / $countones(pe_en) || int'(up_seq) != n) begin failures++; $display("beat order broken: idx %0d at %0d", up_idx, n); end
          checks++;
          if (up_last != (p == lastp && int'(up_idx) == BEATS - 1)) begin failures++; $display("last flag wrong"); end
          n++;
        end
      end
      @(negedge clk); pe_en = '0; up_ready = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
