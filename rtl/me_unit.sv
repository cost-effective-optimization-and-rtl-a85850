// me_unit: modular exponentiation over one exponent segment (ME).
//
// Runs the Montgomery power ladder (Algorithm 1 of the paper) for the SEG bits
// of exponent segment b, most significant bit first, on a ladder pair (S, Z)
// with Z = S*base in the Montgomery domain. Per exponent bit b_i the two MM_H
// multipliers work in parallel on a shared operand X = b_i ? Z : S:
//     upper MM_H:  S <- MM(S, X)     (b_i=1: S*Z,  b_i=0: S*S)
//     lower MM_H:  Z <- MM(X, Z)     (b_i=1: Z*Z,  b_i=0: S*Z)
// so multiplication and squaring swap between the two multipliers with b_i
// and both run for every bit, whatever its value (Fig. 4/5 of the paper).
// The exponent sits in a shift register shifted left once per bit.
// With FINAL=1 the unit also performs line 10 of Algorithm 1, S <- MM(1, S),
// leaving the Montgomery domain; FINAL=0 units keep (S, Z) in the Montgomery
// domain so the next pipeline stage continues the ladder with the next
// segment. Passing both S and Z between stages is this design's reading of
// the paper's segmented ladder; Fig. 4 shows S and Z as ME inputs.
//
// Interface: pulse `start` with s_in, z_in, b_in, m valid (captured). `done`
// (the paper's fin) pulses when s_out/z_out hold the result; busy is high in
// between. Latency: SEG*(LW+2) cycles, plus LW+2 if FINAL, plus 1.
module me_unit #(
  parameter int unsigned N     = 2048,
  parameter int unsigned WORD  = 16,
  parameter int unsigned SEG   = 342,
  parameter bit          FINAL = 1'b0
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [N:0]     s_in,
  input  logic [N:0]     z_in,
  input  logic [SEG-1:0] b_in,
  input  logic [N-1:0]   m,
  output logic [N:0]     s_out,
  output logic [N:0]     z_out,
  output logic           done,
  output logic           busy
);
  typedef enum logic [2:0] {IDLE, LAUNCH, WAIT, CONV, CONV_WAIT} state_e;
  localparam int unsigned CW = $clog2(SEG + 1);

  state_e         st_q;
  logic [SEG-1:0] b_q;
  logic [CW-1:0]  cnt_q;
  logic [N-1:0]   m_q;
  logic [N:0]     s_q, z_q, x;
  logic           up_start, lo_start;
  logic [N:0]     up_a, up_b, up_r, lo_r;
  logic           up_done, lo_done, up_busy, lo_busy;

  assign s_out = s_q;
  assign z_out = z_q;

  // Operand mux selected by the current exponent bit.
  always_comb begin
    x        = b_q[SEG-1] ? z_q : s_q;
    up_start = (st_q == LAUNCH) || (st_q == CONV);
    lo_start = (st_q == LAUNCH);
    up_a     = (st_q == CONV) ? (N+1)'(1) : s_q;
    up_b     = (st_q == CONV) ? s_q : x;
  end

  mm_h #(.N(N), .WORD(WORD)) u_mm_up (
    .clk, .rst_n, .start(up_start), .a(up_a), .b(up_b), .m(m_q),
    .r(up_r), .done(up_done), .busy(up_busy));

  mm_h #(.N(N), .WORD(WORD)) u_mm_lo (
    .clk, .rst_n, .start(lo_start), .a(x), .b(z_q), .m(m_q),
    .r(lo_r), .done(lo_done), .busy(lo_busy));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q  <= IDLE;
      b_q   <= '0;
      cnt_q <= '0;
      m_q   <= '0;
      s_q   <= '0;
      z_q   <= '0;
      done  <= 1'b0;
      busy  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st_q)
        IDLE: if (start) begin
          s_q   <= s_in;
          z_q   <= z_in;
          b_q   <= b_in;
          m_q   <= m;
          cnt_q <= CW'(SEG);
          busy  <= 1'b1;
          st_q  <= LAUNCH;
        end
        LAUNCH: st_q <= WAIT;
        WAIT: if (up_done && lo_done) begin
          s_q   <= up_r;
          z_q   <= lo_r;
          b_q   <= b_q << 1;
          cnt_q <= cnt_q - 1'b1;
          if (cnt_q != CW'(1)) st_q <= LAUNCH;
          else if (FINAL)      st_q <= CONV;
          else begin
            st_q <= IDLE;
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
        CONV: st_q <= CONV_WAIT;
        CONV_WAIT: if (up_done) begin
          s_q  <= up_r;
          st_q <= IDLE;
          busy <= 1'b0;
          done <= 1'b1;
        end
        default: st_q <= IDLE;
      endcase
    end
  end

  // Both multipliers have the same latency, so they finish together.
  always_ff @(posedge clk) if (rst_n && st_q == WAIT) assert (up_done == lo_done);
endmodule
