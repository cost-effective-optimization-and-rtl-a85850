// me_pipeline: the STAGES-stage pipelined modular exponentiation unit.
//
// 2*STAGES me_unit instances, STAGES per CRT branch (six for the paper's
// 2048-bit configuration), computing U_p = c^(p-1) mod p^2 and
// U_q = c^(q-1) mod q^2 (possibly plus the modulus, Sec. 3.2 of the paper).
// The exponent p-1 is cut into STAGES segments, p-1 = {h_S, ..., h_2, h_1}
// (h_1 the least significant); pipeline stage k (k = 1..STAGES) of a branch
// runs the ladder over segment h_{STAGES+1-k}. Stage 1 starts from
// S = R mod p^2 (Montgomery one) and Z = S_p from the preprocessing unit;
// each later stage takes the (S, Z) pair its predecessor left in its
// registers, and only the last stage leaves the Montgomery domain. Each ME's
// own S/Z registers are the inter-stage registers of the paper's Fig. 2.
//
// Interface: start[k] pulses start stage k of both branches (all stages are
// started on the same clock edge by the control, each only when it holds a
// valid operand). busy is high while any stage works. up/uq are the outputs of
// the last stage. Segment widths: SEG = ceil((N/2)/STAGES).
module me_pipeline #(
  parameter int unsigned N      = 2048,
  parameter int unsigned WORD   = 16,
  parameter int unsigned STAGES = 3,
  localparam int unsigned SEG   = mesa_pkg::seg_width(N, STAGES)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [STAGES-1:0]  start,
  input  logic [N:0]         sp,
  input  logic [N:0]         sq,
  input  logic [N-1:0]       one_p,
  input  logic [N-1:0]       one_q,
  input  logic [N-1:0]       p2,
  input  logic [N-1:0]       q2,
  input  logic [SEG-1:0]     hp [STAGES],   // hp[j-1] = h_{p,j}
  input  logic [SEG-1:0]     hq [STAGES],
  output logic [N:0]         up,
  output logic [N:0]         uq,
  output logic               busy
);
  logic [N:0] ps [STAGES], pz [STAGES], qs [STAGES], qz [STAGES];
  logic [STAGES-1:0] p_busy, q_busy;

  for (genvar k = 0; k < STAGES; k++) begin : g_stage
    localparam bit LAST = (k == STAGES - 1);
    logic [N:0] p_s_in, p_z_in, q_s_in, q_z_in;
    logic       p_done, q_done;
    if (k == 0) begin : g_first
      assign p_s_in = (N+1)'(one_p);
      assign p_z_in = sp;
      assign q_s_in = (N+1)'(one_q);
      assign q_z_in = sq;
    end else begin : g_next
      assign p_s_in = ps[k-1];
      assign p_z_in = pz[k-1];
      assign q_s_in = qs[k-1];
      assign q_z_in = qz[k-1];
    end
    me_unit #(.N(N), .WORD(WORD), .SEG(SEG), .FINAL(LAST)) u_me_p (
      .clk, .rst_n, .start(start[k]), .s_in(p_s_in), .z_in(p_z_in),
      .b_in(hp[STAGES-1-k]), .m(p2), .s_out(ps[k]), .z_out(pz[k]),
      .done(p_done), .busy(p_busy[k]));
    me_unit #(.N(N), .WORD(WORD), .SEG(SEG), .FINAL(LAST)) u_me_q (
      .clk, .rst_n, .start(start[k]), .s_in(q_s_in), .z_in(q_z_in),
      .b_in(hq[STAGES-1-k]), .m(q2), .s_out(qs[k]), .z_out(qz[k]),
      .done(q_done), .busy(q_busy[k]));
    // The two branches run in lockstep.
    always_ff @(posedge clk) if (rst_n) assert (p_done == q_done);
  end

  assign up   = ps[STAGES-1];
  assign uq   = qs[STAGES-1];
  assign busy = |{p_busy, q_busy};
endmodule
