// mm_h: high-radix CIOS Montgomery modular multiplier (MM_H).
//
// Computes r = a*b*R^-1 mod m, possibly plus m, with R = 2^(LW*WORD) and
// LW = ceil((N+2)/WORD), following the CIOS algorithm (Algorithm 2 of the
// paper): for each WORD-bit word b_i of b,
//     u   = t + a*b_i
//     q_i = (u mod 2^WORD) * m' mod 2^WORD,  m' = -m^-1 mod 2^WORD
//     t   = (u + q_i*m) / 2^WORD
// One outer iteration (a full N x WORD product and an N x WORD product for the
// reduction, the work the paper maps onto DSP48E1 slices) is done per clock.
// As in the paper the final comparison/subtraction is left out: for
// a, b < 2m the result is below 2m. m' is derived from the low word of m when
// a multiplication starts, by Newton iteration (mesa_pkg::neg_inv64); the
// paper lists m' as an input without saying where it comes from.
//
// Interface: pulse `start` for one cycle with a, b, m valid (they are
// captured). `done` pulses when `r` is valid, LW+1 cycles after the start
// cycle; `busy` is high in between. r holds until the next start. m odd.
module mm_h #(
  parameter int unsigned N    = 2048,
  parameter int unsigned WORD = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [N:0]   a,
  input  logic [N:0]   b,
  input  logic [N-1:0] m,
  output logic [N:0]   r,
  output logic         done,
  output logic         busy
);
  localparam int unsigned LW = mesa_pkg::mont_words(N, WORD);
  localparam int unsigned CW = $clog2(LW + 1);
  localparam int unsigned UW = N + WORD + 4;

  logic [N:0]         a_q;
  logic [LW*WORD-1:0] b_q;
  logic [N-1:0]       m_q;
  logic [WORD-1:0]    minv_q;
  logic [N+1:0]       t_q;
  logic [CW-1:0]      cnt_q;
  logic [UW-1:0]      u, v;
  logic [WORD-1:0]    qi;
  logic [2*WORD-1:0]  qprod;
  logic [63:0]        minv_full;

  always_comb begin
    minv_full = mesa_pkg::neg_inv64(64'(m));
    u     = UW'(t_q) + UW'(a_q) * UW'(b_q[WORD-1:0]);
    qprod = u[WORD-1:0] * minv_q;
    qi    = qprod[WORD-1:0];
    v     = u + UW'(m_q) * UW'(qi);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q    <= '0;
      b_q    <= '0;
      m_q    <= '0;
      minv_q <= '0;
      t_q    <= '0;
      cnt_q  <= '0;
      busy   <= 1'b0;
      done   <= 1'b0;
      r      <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        a_q    <= a;
        b_q    <= (LW*WORD)'(b);
        m_q    <= m;
        minv_q <= minv_full[WORD-1:0];
        t_q    <= '0;
        cnt_q  <= CW'(LW);
        busy   <= 1'b1;
      end else if (busy) begin
        t_q   <= v[N+1+WORD:WORD];
        b_q   <= b_q >> WORD;
        cnt_q <= cnt_q - 1'b1;
        if (cnt_q == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          r    <= v[N+WORD:WORD];
        end
      end
    end
  end

  // The low word of u + q_i*m must vanish: that is what q_i is chosen for.
  always_ff @(posedge clk) if (rst_n && busy) assert (v[WORD-1:0] == '0);
endmodule
