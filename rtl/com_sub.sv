// com_sub: word-serial comparator and subtractor (com/sub).
//
// Computes r = (a >= m) ? a - m : a, the "judgment" step of the paper.
// The comparison walks CW-bit words from the most significant end and stops
// at the first word that differs, so it takes 1..NCH cycles; only when
// a >= m a subtraction follows, one word per cycle from the least significant
// end with a borrow bit (NCH cycles), NCH = ceil((N+1)/CW). The paper gives
// the function and, in its timing table, a variable 1~18-cycle compare and an
// 18-cycle subtract at N=1024, which a 64-bit word-serial unit reproduces;
// the word width is this design's choice.
//
// Interface: pulse `start` with a (N+1 bits) and m (N bits) valid (captured);
// `done` pulses with r valid and `ge` telling whether m was subtracted.
module com_sub #(
  parameter int unsigned N  = 2048,
  parameter int unsigned CW = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [N:0]   a,
  input  logic [N-1:0] m,
  output logic [N:0]   r,
  output logic         ge,
  output logic         done,
  output logic         busy
);
  localparam int unsigned NCH = (N + 1 + CW - 1) / CW;
  localparam int unsigned IW  = $clog2(NCH + 1);

  typedef enum logic [1:0] {IDLE, COMP, SUB} state_e;

  state_e             st_q;
  logic [NCH*CW-1:0]  a_q, m_q, r_q;
  logic [IW-1:0]      idx_q;
  logic               borrow_q;
  logic [CW-1:0]      aw, mw;
  logic [CW:0]        dw;

  always_comb begin
    aw = a_q[idx_q*CW +: CW];
    mw = m_q[idx_q*CW +: CW];
    dw = {1'b0, aw} - {1'b0, mw} - (CW+1)'(borrow_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q     <= IDLE;
      a_q      <= '0;
      m_q      <= '0;
      r_q      <= '0;
      idx_q    <= '0;
      borrow_q <= 1'b0;
      r        <= '0;
      ge       <= 1'b0;
      done     <= 1'b0;
      busy     <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st_q)
        IDLE: if (start) begin
          a_q   <= (NCH*CW)'(a);
          m_q   <= (NCH*CW)'(m);
          idx_q <= IW'(NCH - 1);
          busy  <= 1'b1;
          st_q  <= COMP;
        end
        COMP: begin
          if (aw > mw || (aw == mw && idx_q == '0)) begin
            idx_q    <= '0;
            borrow_q <= 1'b0;
            st_q     <= SUB;
          end else if (aw < mw) begin
            r    <= a_q[N:0];
            ge   <= 1'b0;
            done <= 1'b1;
            busy <= 1'b0;
            st_q <= IDLE;
          end else begin
            idx_q <= idx_q - 1'b1;
          end
        end
        SUB: begin
          r_q[idx_q*CW +: CW] <= dw[CW-1:0];
          borrow_q <= dw[CW];
          idx_q    <= idx_q + 1'b1;
          if (idx_q == IW'(NCH - 1)) begin
            r    <= {dw[CW-1:0], r_q[(NCH-1)*CW-1:0]} [N:0];
            ge   <= 1'b1;
            done <= 1'b1;
            busy <= 1'b0;
            st_q <= IDLE;
          end
        end
        default: st_q <= IDLE;
      endcase
    end
  end
endmodule
