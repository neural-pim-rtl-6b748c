// pe_adder: PE-level adder that sums crossbar results into kernel results.
//
// A kernel taller than 128 rows is spread over `kernel_xbars` crossbars of
// the PE, each producing an 8-bit NNADC code per weight group. After a
// window's conversions, `start` makes the adder walk crossbars 0 .. xbars-1,
// one OR row (GROUPS codes) per clock, and add the codes of each run of
// kernel_xbars consecutive crossbars lane by lane. Each finished run leaves as
// one beat of GROUPS SUM_W-bit sums on a valid/ready stream; out_idx numbers
// the beats of the window and out_last marks the final one. While a beat is
// not accepted the adder holds. busy is high from start until the last beat
// is taken. xbars must be a multiple of kernel_xbars.
//
// The paper names the adder (PE floorplan, "PE-level add" in the pipeline);
// the sequential one-row-per-clock organisation is this design's choice.
module pe_adder
  import npim_pkg::*;
#(
  parameter int unsigned XBARS  = 64,
  parameter int unsigned GROUPS = 8,
  localparam int unsigned XW    = (XBARS > 1) ? $clog2(XBARS) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [6:0]                    xbars,
  input  logic [6:0]                    kernel_xbars,
  output logic [XW-1:0]                 or_raddr,
  input  logic [GROUPS-1:0][P_OUT-1:0]  or_rdata,
  output logic                          busy,
  output logic                          out_valid,
  input  logic                          out_ready,
  output logic [GROUPS-1:0][SUM_W-1:0]  out_sums,
  output logic [7:0]                    out_idx,
  output logic                          out_last
);
  logic                         run;
  logic [6:0]                   m, k, n_x, n_k;
  logic [7:0]                   beat;
  logic [GROUPS-1:0][SUM_W-1:0] acc, nxt;

  assign or_raddr = XW'(m);
  assign busy     = run || out_valid;

  always_comb begin
    for (int unsigned g = 0; g < GROUPS; g++)
      nxt[g] = acc[g] + SUM_W'(or_rdata[g]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; m <= '0; k <= '0; beat <= '0; n_x <= '0; n_k <= '0;
      acc <= '0; out_valid <= 1'b0; out_sums <= '0; out_idx <= '0; out_last <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (start && !busy) begin
        run <= 1'b1; m <= '0; k <= '0; beat <= '0; acc <= '0;
        n_x <= xbars; n_k <= kernel_xbars;
      end else if (run && (!out_valid || out_ready)) begin
        if (k == n_k - 7'd1) begin
          out_valid <= 1'b1;
          out_sums  <= nxt;
          out_idx   <= beat;
          out_last  <= (m == n_x - 7'd1);
          beat      <= beat + 8'd1;
          acc       <= '0;
          k         <= '0;
        end else begin
          acc <= nxt;
          k   <= k + 7'd1;
        end
        if (m == n_x - 7'd1) run <= 1'b0;
        m <= m + 7'd1;
      end
    end
  end
endmodule
