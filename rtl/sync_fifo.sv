// sync_fifo: small synchronous FIFO used by the data path.
//
// DEPTH entries of W bits, one clock. push writes din when not full, pop
// removes the head when not empty; dout always shows the head (first-word
// fall-through). Pushing while full or popping while empty is an error and
// is flagged by an assertion.
module sync_fifo #(
  parameter int unsigned W     = 2048,
  parameter int unsigned DEPTH = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  output logic         full,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] rd_q, wr_q;
  logic [PW:0]   cnt_q;

  assign full  = (cnt_q == (PW+1)'(DEPTH));
  assign empty = (cnt_q == '0);
  assign dout  = mem[rd_q];

  function automatic logic [PW-1:0] nxt(logic [PW-1:0] i);
    return (i == PW'(DEPTH - 1)) ? '0 : i + 1'b1;
  endfunction

  always_ff @(posedge clk) if (push && !full) mem[wr_q] <= din;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push && !full) wr_q <= nxt(wr_q);
      if (pop && !empty) rd_q <= nxt(rd_q);
      cnt_q <= cnt_q + (PW+1)'(push && !full) - (PW+1)'(pop && !empty);
    end
  end

  always_ff @(posedge clk) if (rst_n) begin
    assert (!(push && full));
    assert (!(pop && empty));
  end
endmodule
