// post_unit: postprocessing unit (pipeline stage 5, Algorithm 4 steps 3-6).
//
//   L_p = floor(U_p / p),  L_q = floor(U_q / q)        two div_unit
//   m_p = MM_B(L_p, t_pR, n), m_q = MM_B(L_q, t_qR, n)  the shared MM_B
//   m_p = m_p >= n ? m_p - n : m_p  (same for m_q)     two com_sub
//   m   = m_p + m_q;  m = m >= n ? m - n : m           adder + com_sub
// No judgment is made on U_p/U_q before the L function: an unreduced
// U_p = c^(p-1) mod p^2 + p^2 only adds p to L_p, and p*t_p = 0 mod n, so the
// excess vanishes in the MM_B (Sec. 3.2 of the paper). Because
// t_pR = t_p*R^2 mod n and MM_B divides by R^2 (R = 2^(LW*WORD)), the MM_B
// result is already out of the Montgomery domain.
//
// The multiplications run on the preprocessing unit's MM_B (mmb_* port);
// they are requested once the dividers have finished and the preprocessing
// operation of the same pipeline period has released the multipliers
// (mmb_free). The order of the steps is the paper's; the handshakes are this
// design's own.
//
// mmb_lp/mmb_lq are N+1 bits wide to match the multiplier's operand, but a
// quotient L < 2^(N/2+1) only ever drives the low N/2+1 bits; the upper bits
// are constant zero by construction.
//
// Interface: pulse `start` with up/uq valid (they are captured by the
// dividers). `done` pulses when `m` (held until the next done) is valid.
module post_unit #(
  parameter int unsigned N  = 2048,
  parameter int unsigned CW = 64
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [N:0]     up,
  input  logic [N:0]     uq,
  input  logic [N/2-1:0] p,
  input  logic [N/2-1:0] q,
  input  logic [N-1:0]   n,
  // shared MM_B request (to pre_unit)
  output logic           mmb_start,
  output logic [N:0]     mmb_lp,
  output logic [N:0]     mmb_lq,
  input  logic           mmb_free,
  input  logic           mmb_done,
  input  logic [N:0]     mmb_mp,
  input  logic [N:0]     mmb_mq,
  // result
  output logic [N-1:0]   m,
  output logic           done,
  output logic           busy
);
  typedef enum logic [2:0] {IDLE, DIV, MMB_REQ, MMB, JUDGE, ADD, FINAL} state_e;

  state_e       st_q;
  logic         divp_done, divq_done, divp_busy, divq_busy;
  logic [N/2:0] lp, lq;
  logic         dp_seen_q, dq_seen_q;
  logic         cs_start, csp_done, csq_done, csp_ge, csq_ge;
  logic         csp_busy, csq_busy;
  logic [N:0]   csp_r, csq_r;
  logic         jp_seen_q, jq_seen_q;
  logic         add_start, add_done, add_busy;
  logic [N:0]   sum;
  logic         fin_start, fin_done, fin_ge, fin_busy;
  logic [N:0]   fin_r;

  div_unit #(.N(N)) u_div_p (.clk, .rst_n, .start(start && st_q == IDLE), .u(up), .d(p),
                             .q(lp), .done(divp_done), .busy(divp_busy));
  div_unit #(.N(N)) u_div_q (.clk, .rst_n, .start(start && st_q == IDLE), .u(uq), .d(q),
                             .q(lq), .done(divq_done), .busy(divq_busy));

  assign mmb_lp    = (N+1)'(lp);
  assign mmb_lq    = (N+1)'(lq);
  assign mmb_start = (st_q == MMB_REQ) && mmb_free;

  assign cs_start = (st_q == MMB) && mmb_done;
  com_sub #(.N(N), .CW(CW)) u_cs_p (.clk, .rst_n, .start(cs_start), .a(mmb_mp), .m(n),
                                    .r(csp_r), .ge(csp_ge), .done(csp_done), .busy(csp_busy));
  com_sub #(.N(N), .CW(CW)) u_cs_q (.clk, .rst_n, .start(cs_start), .a(mmb_mq), .m(n),
                                    .r(csq_r), .ge(csq_ge), .done(csq_done), .busy(csq_busy));

  assign add_start = (st_q == JUDGE) && (jp_seen_q || csp_done) && (jq_seen_q || csq_done);
  adder #(.N(N), .CW(CW)) u_add (.clk, .rst_n, .start(add_start), .a(csp_r[N-1:0]),
                                 .b(csq_r[N-1:0]), .r(sum), .done(add_done), .busy(add_busy));

  assign fin_start = (st_q == ADD) && add_done;
  com_sub #(.N(N), .CW(CW)) u_cs_fin (.clk, .rst_n, .start(fin_start), .a(sum), .m(n),
                                      .r(fin_r), .ge(fin_ge), .done(fin_done), .busy(fin_busy));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q      <= IDLE;
      dp_seen_q <= 1'b0;
      dq_seen_q <= 1'b0;
      jp_seen_q <= 1'b0;
      jq_seen_q <= 1'b0;
      m         <= '0;
      done      <= 1'b0;
      busy      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st_q)
        IDLE: if (start) begin
          dp_seen_q <= 1'b0;
          dq_seen_q <= 1'b0;
          busy      <= 1'b1;
          st_q      <= DIV;
        end
        DIV: begin
          if (divp_done) dp_seen_q <= 1'b1;
          if (divq_done) dq_seen_q <= 1'b1;
          if ((dp_seen_q || divp_done) && (dq_seen_q || divq_done)) st_q <= MMB_REQ;
        end
        MMB_REQ: if (mmb_free) st_q <= MMB;
        MMB: if (mmb_done) begin
          jp_seen_q <= 1'b0;
          jq_seen_q <= 1'b0;
          st_q      <= JUDGE;
        end
        JUDGE: begin
          if (csp_done) jp_seen_q <= 1'b1;
          if (csq_done) jq_seen_q <= 1'b1;
          if (add_start) st_q <= ADD;
        end
        ADD: if (add_done) st_q <= FINAL;
        FINAL: if (fin_done) begin
          m    <= fin_r[N-1:0];
          done <= 1'b1;
          busy <= 1'b0;
          st_q <= IDLE;
        end
        default: st_q <= IDLE;
      endcase
    end
  end

  // After the judgments both halves are below n, so their sum is below 2n
  // and one final subtraction reduces it.
  always_ff @(posedge clk) if (rst_n) begin
    if (add_start) assert (csp_r < (N+1)'(n) && csq_r < (N+1)'(n));
    if (fin_done)  assert (fin_r < (N+1)'(n));
  end
endmodule
