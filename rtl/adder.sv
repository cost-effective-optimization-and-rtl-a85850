// adder: word-serial large-integer adder (add).
//
// Computes r = a + b for two N-bit operands, CW bits per clock from the least
// significant word with a carry bit, NCH = ceil((N+1)/CW) cycles. Together with
// the following com_sub it forms the modular addition of the two CRT halves.
// The paper gives the function and an 18-cycle add at N=1024; the word-serial
// form is this design's choice.
//
// Interface: pulse `start` with a, b valid (captured); `done` pulses with r
// valid NCH+1 cycles after the start cycle.
module adder #(
  parameter int unsigned N  = 2048,
  parameter int unsigned CW = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic [N:0]   r,
  output logic         done,
  output logic         busy
);
  localparam int unsigned NCH = (N + 1 + CW - 1) / CW;
  localparam int unsigned IW  = $clog2(NCH + 1);

  logic [NCH*CW-1:0] a_q, b_q, r_q;
  logic [IW-1:0]     idx_q;
  logic              carry_q;
  logic [CW:0]       sw;

  always_comb
    sw = {1'b0, a_q[idx_q*CW +: CW]} + {1'b0, b_q[idx_q*CW +: CW]} + (CW+1)'(carry_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q     <= '0;
      b_q     <= '0;
      r_q     <= '0;
      idx_q   <= '0;
      carry_q <= 1'b0;
      r       <= '0;
      done    <= 1'b0;
      busy    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        a_q     <= (NCH*CW)'(a);
        b_q     <= (NCH*CW)'(b);
        idx_q   <= '0;
        carry_q <= 1'b0;
        busy    <= 1'b1;
      end else if (busy) begin
        r_q[idx_q*CW +: CW] <= sw[CW-1:0];
        carry_q <= sw[CW];
        idx_q   <= idx_q + 1'b1;
        if (idx_q == IW'(NCH - 1)) begin
          r    <= {sw[CW-1:0], r_q[(NCH-1)*CW-1:0]} [N:0];
          done <= 1'b1;
          busy <= 1'b0;
        end
      end
    end
  end
endmodule
