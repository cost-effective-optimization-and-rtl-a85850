// pe: processing element, the five-stage eCRT-Paillier decryption pipeline.
//
// Stage 1 (pre_unit) converts c into the Montgomery domains of p^2 and q^2;
// stages 2..STAGES+1 (me_pipeline) raise the result to p-1 and q-1, one
// exponent segment per stage; stage STAGES+2 (post_unit) applies the L
// function, the combined CRT constants, the single judgment and the modular
// addition (Algorithm 4 of the paper). p and q branches are symmetric and run
// side by side. Up to STAGES+2 ciphertexts are in flight, one per stage.
// The PE keeps its own copy of the precomputed parameters, loaded word by
// word from the Cfg_unit by the control unit (prm_we/prm_addr/prm_data);
// which parameter feeds which unit follows Fig. 1/2 of the paper.
//
// Interface: step pulses start every stage whose stage_en bit is set, all on
// the same clock edge; c_in is captured by stage 1 at that edge. busy stays
// high until every started stage has finished; m_out holds the last result
// of stage STAGES+2.
module pe #(
  parameter int unsigned N      = 2048,
  parameter int unsigned WORD   = 16,
  parameter int unsigned STAGES = 3,
  parameter int unsigned CW     = 64,
  localparam int unsigned NST   = STAGES + 2,
  localparam int unsigned AW    = mesa_pkg::CFG_AW
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           prm_we,
  input  logic [AW-1:0]  prm_addr,
  input  logic [N-1:0]   prm_data,
  input  logic           step,
  input  logic [NST-1:0] stage_en,
  input  logic [2*N-1:0] c_in,
  output logic [N-1:0]   m_out,
  output logic           busy
);
  import mesa_pkg::*;

  localparam int unsigned DEPTH = cfg_depth(STAGES);
  localparam int unsigned SEG   = seg_width(N, STAGES);

  logic [N-1:0] prm [DEPTH];

  always_ff @(posedge clk) if (prm_we && prm_addr < AW'(DEPTH)) prm[prm_addr] <= prm_data;

  // Parameter fields.
  logic [N-1:0]   p2, q2, y_p, y_q, one_p, one_q, t_pr, t_qr, n;
  logic [N/2-1:0] dp, dq;
  logic [SEG-1:0] hp [STAGES], hq [STAGES];

  always_comb begin
    p2    = prm[cfg_addr(F_MOD2, BR_P)];
    q2    = prm[cfg_addr(F_MOD2, BR_Q)];
    y_p   = prm[cfg_addr(F_Y, BR_P)];
    y_q   = prm[cfg_addr(F_Y, BR_Q)];
    one_p = prm[cfg_addr(F_ONE, BR_P)];
    one_q = prm[cfg_addr(F_ONE, BR_Q)];
    dp    = prm[cfg_addr(F_DIV, BR_P)][N/2-1:0];
    dq    = prm[cfg_addr(F_DIV, BR_Q)][N/2-1:0];
    t_pr  = prm[cfg_addr(F_TR, BR_P)];
    t_qr  = prm[cfg_addr(F_TR, BR_Q)];
    n     = prm[CFG_N_ADDR];
    for (int j = 1; j <= int'(STAGES); j++) begin
      hp[j-1] = prm[cfg_seg_addr(j, BR_P)][SEG-1:0];
      hq[j-1] = prm[cfg_seg_addr(j, BR_Q)][SEG-1:0];
    end
  end

  // Stage 1: preprocessing (its MM_B are shared with stage NST).
  logic       pre_busy, pre_done, post_done_mmb;
  logic [N:0] sp, sq, mmb_mp, mmb_mq, mmb_lp, mmb_lq;
  logic       mmb_start;

  pre_unit #(.N(N), .WORD(WORD)) u_pre (
    .clk, .rst_n, .pre_start(step && stage_en[0]), .c(c_in), .y_p, .y_q, .p2, .q2,
    .sp, .sq, .pre_done,
    .post_start(mmb_start), .l_p(mmb_lp), .l_q(mmb_lq), .t_pr, .t_qr, .n,
    .mp(mmb_mp), .mq(mmb_mq), .post_done(post_done_mmb), .busy(pre_busy));

  // Stages 2..STAGES+1: pipelined modular exponentiation.
  logic       me_busy;
  logic [N:0] up, uq;

  me_pipeline #(.N(N), .WORD(WORD), .STAGES(STAGES)) u_me (
    .clk, .rst_n, .start({STAGES{step}} & stage_en[STAGES:1]), .sp, .sq, .one_p, .one_q,
    .p2, .q2, .hp, .hq, .up, .uq, .busy(me_busy));

  // Stage STAGES+2: postprocessing.
  logic post_busy, post_done;

  post_unit #(.N(N), .CW(CW)) u_post (
    .clk, .rst_n, .start(step && stage_en[NST-1]), .up, .uq, .p(dp), .q(dq), .n,
    .mmb_start, .mmb_lp, .mmb_lq, .mmb_free(!pre_busy), .mmb_done(post_done_mmb),
    .mmb_mp, .mmb_mq, .m(m_out), .done(post_done), .busy(post_busy));

  assign busy = pre_busy || me_busy || post_busy;
endmodule
