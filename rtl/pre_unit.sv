// pre_unit: preprocessing unit with its two radix-2 Montgomery multipliers.
//
// Pipeline stage 1 (Algorithm 4, step 1): converts the ciphertext c into the
// Montgomery domain of both CRT branches,
//     S_p = MM_B(c, y_p, p^2) = c*R mod p^2,  S_q = MM_B(c, y_q, q^2),
// with y_p = R^3 mod p^2 (y_q likewise): MM_B divides by R^2 (it scans the
// whole 2N-bit ciphertext), so R^3 leaves c in the exponentiation's domain R. S_p/S_q are kept in the stage register until the
// next pre operation ends, so the first ME stage can take them at the next
// pipeline step.
// The paper shares these two MM_B with the postprocessing unit (Sec. 4.2);
// this unit therefore also accepts a post request, which runs
//     m_p = MM_B(L_p, t_pR, n),  m_q = MM_B(L_q, t_qR, n)
// (Algorithm 4, step 4) on the same multipliers once the pre operation of the
// same pipeline period is finished. Fig. 2 draws separate MM_B boxes for the
// two units; the sharing stated in the text is followed here.
//
// Interface: pulse pre_start or post_start (never both, never while busy).
// pre_done pulses when sp/sq are updated, 2*LW*WORD+2 cycles after the start
// cycle; post_done pulses when mp/mq are valid, 2*LW*WORD+1 cycles after it.
module pre_unit #(
  parameter int unsigned N    = 2048,
  parameter int unsigned WORD = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  // preprocessing request
  input  logic         pre_start,
  input  logic [2*N-1:0] c,
  input  logic [N-1:0] y_p,
  input  logic [N-1:0] y_q,
  input  logic [N-1:0] p2,
  input  logic [N-1:0] q2,
  output logic [N:0]   sp,
  output logic [N:0]   sq,
  output logic         pre_done,
  // postprocessing request (shared multipliers)
  input  logic         post_start,
  input  logic [N:0]   l_p,
  input  logic [N:0]   l_q,
  input  logic [N-1:0] t_pr,
  input  logic [N-1:0] t_qr,
  input  logic [N-1:0] n,
  output logic [N:0]   mp,
  output logic [N:0]   mq,
  output logic         post_done,
  output logic         busy
);
  logic             start, is_post_q;
  logic [2*N-1:0]   pa, qa;
  logic [N:0]       pb, qb;
  logic [N-1:0]     pm, qm;
  logic             p_done, q_done, p_busy, q_busy;

  assign start = pre_start || post_start;

  // Operand multiplexers in front of the shared multipliers.
  always_comb begin
    if (post_start) begin
      pa = (2*N)'(l_p);     pb = (N+1)'(t_pr); pm = n;
      qa = (2*N)'(l_q);     qb = (N+1)'(t_qr); qm = n;
    end else begin
      pa = c;               pb = (N+1)'(y_p);  pm = p2;
      qa = c;               qb = (N+1)'(y_q);  qm = q2;
    end
  end

  mm_b #(.N(N), .WORD(WORD)) u_mmb_p (
    .clk, .rst_n, .start, .a(pa), .b(pb), .m(pm), .r(mp), .done(p_done), .busy(p_busy));
  mm_b #(.N(N), .WORD(WORD)) u_mmb_q (
    .clk, .rst_n, .start, .a(qa), .b(qb), .m(qm), .r(mq), .done(q_done), .busy(q_busy));

  // Busy also covers the cycle in which S_p/S_q are written.
  assign busy      = p_busy || q_busy || (p_done && !is_post_q);
  assign post_done = p_done && is_post_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      is_post_q <= 1'b0;
      pre_done  <= 1'b0;
      sp        <= '0;
      sq        <= '0;
    end else begin
      if (start) is_post_q <= post_start;
      pre_done <= p_done && !is_post_q;
      if (p_done && !is_post_q) begin
        sp <= mp;
        sq <= mq;
      end
    end
  end

  always_ff @(posedge clk) if (rst_n) begin
    assert (!(pre_start && post_start));
    if (start) assert (!(p_busy || q_busy));
    assert (p_done == q_done);
  end
endmodule
