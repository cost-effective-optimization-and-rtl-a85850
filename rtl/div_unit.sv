// div_unit: large-integer restoring divider (div) computing the L function.
//
// L_p(U) = (U-1)/p for U = 1 (mod p). Because U mod p = 1, the exact quotient
// equals floor(U/p), so the "-1" of the L function is not needed; the paper
// removes it the same way. The divider is a restoring divider producing one
// quotient bit per clock, most significant first:
//     for i = QB-1 .. 0:  if rem >= d*2^i then rem -= d*2^i, q_i = 1
// The dividend is below 2*d^2 (an unreduced exponentiation result), so the
// quotient has QB = N/2+1 bits. The paper gives the function and the
// restoring method; the bit-per-clock schedule is this design's choice.
//
// Interface: pulse `start` with u (N+1 bits) and d (N/2 bits, nonzero)
// valid; `done` pulses when q holds the quotient, QB+1 cycles after start.
module div_unit #(
  parameter int unsigned N = 2048
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [N:0]     u,
  input  logic [N/2-1:0] d,
  output logic [N/2:0]   q,
  output logic           done,
  output logic           busy
);
  localparam int unsigned QB = N / 2 + 1;
  localparam int unsigned CW = $clog2(QB + 1);

  logic [N:0]    rem_q;
  logic [N:0]    dsh_q;   // d shifted to the current quotient position
  logic [CW-1:0] cnt_q;
  logic [N/2:0]  q_q;
  logic          ge;
  logic [N:0]    diff;

  always_comb begin
    ge   = rem_q >= dsh_q;
    diff = rem_q - dsh_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem_q <= '0;
      dsh_q <= '0;
      cnt_q <= '0;
      q_q   <= '0;
      q     <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        rem_q <= u;
        dsh_q <= (N+1)'(d) << (QB - 1);
        q_q   <= '0;
        cnt_q <= CW'(QB);
        busy  <= 1'b1;
      end else if (busy) begin
        if (ge) rem_q <= diff;
        dsh_q <= dsh_q >> 1;
        q_q   <= {q_q[N/2-1:0], ge};
        cnt_q <= cnt_q - 1'b1;
        if (cnt_q == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          q    <= {q_q[N/2-1:0], ge};
        end
      end
    end
  end

  // The quotient must fit: the dividend is below d*2^QB.
  always_ff @(posedge clk) if (rst_n && start && !busy) assert ((N+QB+1)'(u) < ((N+QB+1)'(d) << QB));
endmodule
