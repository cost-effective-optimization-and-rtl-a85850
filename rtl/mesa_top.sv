// mesa_top: MESA, a pipelined eCRT-Paillier decryption accelerator.
//
// Decrypts Paillier ciphertexts c (N-bit key, 2N-bit c < n^2, reduced by
// CRT to work modulo p^2 and q^2) into plaintexts m = L(c^lambda mod n^2)*mu mod n,
// evaluated as the eCRT form
//     m = [L_p(c^(p-1) mod p^2)*t_p + L_q(c^(q-1) mod q^2)*t_q] mod n.
// Blocks (Fig. 1 of the paper): the control unit, the data path (ciphertext
// in, plaintext out), the Cfg_unit parameter RAM and one PE holding the
// STAGES+2-stage pipeline (pre, STAGES ME stages, post).
//
// Use: write the precomputed parameters into the Cfg_unit through cfg_we /
// cfg_waddr / cfg_wdata (address map in mesa_pkg), raise en, then stream
// ciphertexts in through c_valid/c_ready and collect plaintexts in order
// through m_valid/m_ready. Results appear STAGES+2 pipeline periods after
// their ciphertext is taken; in steady state one result leaves per period,
// the period being set by the slowest stage (an ME stage for the default
// sizes). `loaded` is high once the parameters are in the PE; `stall` is high
// while a result waits because the output is not read.
module mesa_top #(
  parameter int unsigned N      = 2048,
  parameter int unsigned WORD   = 16,
  parameter int unsigned STAGES = 3,
  parameter int unsigned CW     = 64,
  parameter int unsigned FIFO_DEPTH = 2,
  localparam int unsigned AW    = mesa_pkg::CFG_AW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          cfg_we,
  input  logic [AW-1:0] cfg_waddr,
  input  logic [N-1:0]  cfg_wdata,
  input  logic          c_valid,
  output logic          c_ready,
  input  logic [2*N-1:0] c_data,
  output logic          m_valid,
  input  logic          m_ready,
  output logic [N-1:0]  m_data,
  output logic          loaded,
  output logic          stall
);
  localparam int unsigned NST = STAGES + 2;

  logic           cfg_re, pe_rst_n, prm_we, step, pe_busy;
  logic [AW-1:0]  cfg_raddr, prm_addr;
  logic [N-1:0]   cfg_rdata, m_out;
  logic [2*N-1:0] in_data;
  logic [NST-1:0] stage_en;
  logic           in_avail, in_pop, out_full, out_push;

  control_unit #(.STAGES(STAGES)) u_ctrl (
    .clk, .rst_n, .en, .cfg_re, .cfg_raddr, .pe_rst_n, .prm_we, .prm_addr,
    .step, .stage_en, .pe_busy, .in_avail, .in_pop, .out_full, .out_push,
    .loaded, .stall);

  cfg_unit #(.N(N), .STAGES(STAGES)) u_cfg (
    .clk, .we(cfg_we), .waddr(cfg_waddr), .wdata(cfg_wdata),
    .re(cfg_re), .raddr(cfg_raddr), .rdata(cfg_rdata));

  data_path #(.N(N), .DEPTH(FIFO_DEPTH)) u_dp (
    .clk, .rst_n, .c_valid, .c_ready, .c_data, .m_valid, .m_ready, .m_data,
    .in_avail, .in_pop, .in_data, .out_full, .out_push, .out_data(m_out));

  pe #(.N(N), .WORD(WORD), .STAGES(STAGES), .CW(CW)) u_pe (
    .clk, .rst_n(pe_rst_n), .prm_we, .prm_addr, .prm_data(cfg_rdata),
    .step, .stage_en, .c_in(in_data), .m_out, .busy(pe_busy));
endmodule
