// tile_controller: the tile's window sequencer (two-stage coarse pipeline).
//
// Control vectors (ctrl_vec_t, one per sliding window) enter a CVQ-deep
// queue. For each window the controller runs pipeline stage 1:
//   COPY   read in_words words per enabled PE from the eDRAM (one per clock,
//          from in_base of that PE) and send them over the bus into the PE's
//          input register one clock later (eDRAM read latency);
//   START  wait until every enabled PE can start (its previous window's sums
//          are converted), then pulse pe_start;
//   WAIT   wait for the analog accumulation (stage 1 of the PEs) to end.
// The window's vector is then handed to stage 2 (s2_cv, s2_valid): the PE
// conversions and adders, the post-processing unit and the buffer writes.
// Stage 2 of window i runs while stage 1 of window i+1 copies and computes;
// eDRAM reads happen only in stage 1 and writes only in stage 2. A stage-2
// queue of two windows decouples them; s2_done retires the oldest.
// start_stall is high in every clock that START waits for the PEs.
//
// The two-stage pipeline and the eDRAM read/write split are the paper's
// (Fig. 8, Sec. 5.2.4); queue depths and the per-PE copy order are this
// design's choices.
module tile_controller
  import npim_pkg::*;
#(
  parameter int unsigned NPE   = 4,
  parameter int unsigned CVQ   = 4,
  parameter int unsigned WORDS = 8192,
  parameter int unsigned IRW   = 10,
  localparam int unsigned PW   = (NPE > 1) ? $clog2(NPE) : 1,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cv_valid,
  output logic            cv_ready,
  input  ctrl_vec_t       cv_in,
  // eDRAM read port
  output logic            rd_en,
  output logic [AW-1:0]   rd_addr,
  // bus, downstream
  output logic            dn_valid,
  output logic [PW-1:0]   dn_pe,
  output logic [IRW-1:0]  dn_addr,
  // PEs
  output logic [NPE-1:0]  pe_start,
  output ctrl_vec_t       s1_cv,
  input  logic [NPE-1:0]  pe_can_start,
  input  logic [NPE-1:0]  pe_s1_busy,
  // stage 2
  output logic            s2_valid,
  output ctrl_vec_t       s2_cv,
  input  logic            s2_done,
  output logic            start_stall,
  output logic            idle
);
  typedef enum logic [2:0] {IDLE, COPY, DRAIN, START, SETTLE, WAIT} state_e;
  state_e state;

  ctrl_vec_t              q [CVQ];
  logic [$clog2(CVQ):0]   q_cnt;
  logic [$clog2(CVQ)-1:0] q_rd, q_wr;
  ctrl_vec_t              s2q [2];
  logic [1:0]             s2_cnt;
  logic                   s2_rd, s2_wr;
  ctrl_vec_t              cur;
  logic [PW-1:0]          p;
  logic [10:0]            w;
  logic                   push_s2, pop_cv;

  function automatic logic [15:0] base_of(ctrl_vec_t c, logic [PW-1:0] pe_i);
    case (pe_i)
      2'd0:    return c.in_base0;
      2'd1:    return c.in_base1;
      2'd2:    return c.in_base2;
      default: return c.in_base3;
    endcase
  endfunction

  function automatic logic [PW:0] next_en(logic [NPE-1:0] en, logic [PW:0] from);
    for (int unsigned i = 0; i < NPE; i++)
      if (en[i] && (i >= 32'(from))) return (PW+1)'(i);
    return (PW+1)'(NPE);
  endfunction

  assign cv_ready    = (q_cnt < ($clog2(CVQ)+1)'(CVQ));
  assign pop_cv      = (state == IDLE) && (q_cnt != 0);
  assign s1_cv       = cur;
  assign s2_valid    = (s2_cnt != 0);
  assign s2_cv       = s2q[s2_rd];
  assign push_s2     = (state == START) && ((pe_can_start & cur.pe_en) == cur.pe_en) && (s2_cnt < 2'd2);
  assign start_stall = (state == START) && !push_s2;
  assign pe_start    = push_s2 ? cur.pe_en : '0;
  assign rd_en       = (state == COPY);
  assign rd_addr     = AW'(base_of(cur, p) + 16'(w));
  assign idle        = (state == IDLE) && (q_cnt == 0) && (s2_cnt == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_cnt <= '0; q_rd <= '0; q_wr <= '0;
      s2_cnt <= '0; s2_rd <= 1'b0; s2_wr <= 1'b0;
      state <= IDLE; cur <= '0; p <= '0; w <= '0;
      dn_valid <= 1'b0; dn_pe <= '0; dn_addr <= '0;
    end else begin
      // control-vector queue
      if (cv_valid && cv_ready) begin
        q[q_wr] <= cv_in; q_wr <= q_wr + 1'b1;
      end
      q_cnt <= q_cnt + (($clog2(CVQ)+1)'(cv_valid && cv_ready)) - (($clog2(CVQ)+1)'(pop_cv));
      // stage-2 queue
      if (push_s2) begin
        s2q[s2_wr] <= cur; s2_wr <= ~s2_wr;
      end
      if (s2_done && s2_cnt != 0) s2_rd <= ~s2_rd;
      s2_cnt <= s2_cnt + 2'(push_s2) - 2'(s2_done && s2_cnt != 0);

      dn_valid <= rd_en;
      dn_pe    <= p;
      dn_addr  <= IRW'(w);

      case (state)
        IDLE: if (pop_cv) begin
          logic [PW:0] f;
          cur  <= q[q_rd]; q_rd <= q_rd + 1'b1;
          f = next_en(q[q_rd].pe_en, '0);
          p <= PW'(f); w <= '0;
          state <= (f == (PW+1)'(NPE) || q[q_rd].in_words == 0) ? START : COPY;
        end
        COPY: begin
          if (w == cur.in_words - 11'd1) begin
            logic [PW:0] f;
            f = next_en(cur.pe_en, (PW+1)'(p) + 1'b1);
            w <= '0;
            if (f == (PW+1)'(NPE)) state <= DRAIN;
            else p <= PW'(f);
          end else w <= w + 11'd1;
        end
        DRAIN:  state <= START;
        START:  if (push_s2) state <= SETTLE;
        SETTLE: state <= WAIT;
        WAIT:   if ((pe_s1_busy & cur.pe_en) == '0) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end
endmodule
