// mm_b: radix-2 Montgomery modular multiplier (MM_B).
//
// Computes r = a*b*RB^-1 mod m, possibly plus m, with RB = 2^K,
// K = 2*LW*WORD, i.e. RB = R^2 for the R of mesa_pkg. The multiplier a may be
// 2N bits wide: the preprocessing feeds the whole ciphertext c < n^2 into it
// (the paper's data-flow figure shows this multiplier as 2N = 4096 bits wide,
// and its timing table gives it about 2N cycles). a is scanned one bit per clock,
// least significant bit first:  t <- (t + a_i*b + q_i*m) / 2, q_i = parity.
// Only adders are needed (no DSP), as the paper intends for the LUT-only MM_B
// of the pre- and postprocessing. There is no final subtraction: with
// b < m and a < RB the result stays below 2m, which is what the rest of
// the datapath accepts. The paper gives the algorithm family and the
// ~log2(p)+2 iteration count; the single iteration per clock and the
// start/done handshake are this design's choice.
//
// Interface: pulse `start` for one cycle with a (2N bits), b, m valid (they
// are captured). `busy` is high while computing; `done` pulses for one cycle when
// `r` holds the result, K+1 cycles after the start cycle. `r` is held until
// the next start. m must be odd.
module mm_b #(
  parameter int unsigned N    = 2048,
  parameter int unsigned WORD = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [2*N-1:0] a,
  input  logic [N:0]   b,
  input  logic [N-1:0] m,
  output logic [N:0]   r,
  output logic         done,
  output logic         busy
);
  localparam int unsigned K  = 2 * mesa_pkg::mont_words(N, WORD) * WORD;
  localparam int unsigned CW = $clog2(K + 1);

  logic [2*N-1:0] a_q;
  logic [N:0]    b_q;
  logic [N-1:0]  m_q;
  logic [N+1:0]  t_q;
  logic [CW-1:0] cnt_q;
  logic [N+2:0]  s1, s2;

  // One radix-2 Montgomery step.
  always_comb begin
    s1 = {1'b0, t_q} + (a_q[0] ? {2'b00, b_q} : '0);
    s2 = s1 + (s1[0] ? {3'b000, m_q} : '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q   <= '0;
      b_q   <= '0;
      m_q   <= '0;
      t_q   <= '0;
      cnt_q <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
      r     <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        a_q   <= a;
        b_q   <= b;
        m_q   <= m;
        t_q   <= '0;
        cnt_q <= CW'(K);
        busy  <= 1'b1;
      end else if (busy) begin
        t_q   <= s2[N+2:1];
        a_q   <= a_q >> 1;
        cnt_q <= cnt_q - 1'b1;
        if (cnt_q == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          r    <= s2[N+1:1];
        end
      end
    end
  end

  // The result is below 2m < 2^(N+1); the top bit of t never sets.
  always_ff @(posedge clk) if (rst_n && done) assert (t_q[N+1] == 1'b0);
endmodule
