// mesa_pkg: constants and helper functions shared by the MESA eCRT-Paillier
// decryption accelerator.
//
// Montgomery domain. All three moduli that the datapath multiplies under
// (p^2, q^2 and n) are N bits wide, so one Montgomery constant serves them all:
// R = 2^(LW*WORD) with LW = ceil((N+2)/WORD) words. This is the R of the CIOS
// algorithm (R >= 4*modulus), which lets both multipliers skip the final
// subtraction and keep every intermediate value below twice its modulus.
// The radix-2 multiplier scans 2*LW*WORD bits (its constant is R^2) because
// it takes the whole 2N-bit ciphertext; the constants y_p and t_pR below are
// scaled for that so that values reach the exponentiation in domain R and
// leave the postprocessing in the normal domain.
//
// Cfg_unit address map. The Cfg_unit RAM holds one N-bit word per entry:
//   0/1  p^2   / q^2      moduli of the two exponentiation branches
//   2/3  y_p   / y_q      R^3 mod p^2, R^3 mod q^2 (domain conversion of c)
//   4/5  one_p / one_q    R mod p^2, R mod q^2 (ladder start value S)
//   6/7  p     / q        divisors of the L function
//   8/9  t_pR  / t_qR     combined CRT constants, t_p*R^2 mod n, t_q*R^2 mod n
//   10   n                public modulus
//   11+2*(j-1)+b          exponent segment h_{b,j}, j = 1..STAGES (h_1 = LSBs)
// The map is this implementation's choice; the paper lists the parameters but
// not their layout.
package mesa_pkg;

  // Branch index: the two symmetric halves of the CRT datapath.
  typedef enum logic {BR_P = 1'b0, BR_Q = 1'b1} branch_e;

  // Per-branch parameter fields of the Cfg_unit.
  typedef enum logic [2:0] {
    F_MOD2 = 3'd0,
    F_Y    = 3'd1,
    F_ONE  = 3'd2,
    F_DIV  = 3'd3,
    F_TR   = 3'd4
  } cfg_field_e;

  localparam int unsigned CFG_N_ADDR = 10;
  localparam int unsigned CFG_SEG_BASE = 11;
  localparam int unsigned CFG_AW = 6;

  // Address of a per-branch field.
  function automatic int unsigned cfg_addr(cfg_field_e f, branch_e br);
    return 2 * int'(f) + int'(br);
  endfunction

  // Address of exponent segment h_{br,j}, j = 1..stages.
  function automatic int unsigned cfg_seg_addr(int unsigned j, branch_e br);
    return CFG_SEG_BASE + 2 * (j - 1) + int'(br);
  endfunction

  // Number of Cfg_unit entries for a given number of exponentiation stages.
  function automatic int unsigned cfg_depth(int unsigned stages);
    return CFG_SEG_BASE + 2 * stages;
  endfunction

  // Number of WORD-bit words of the Montgomery constant R for an N-bit modulus.
  function automatic int unsigned mont_words(int unsigned n, int unsigned word);
    return (n + 2 + word - 1) / word;
  endfunction

  // Width of one exponent segment: the N/2-bit exponent p-1 is split into
  // `stages` equal segments, the top one zero-padded.
  function automatic int unsigned seg_width(int unsigned n, int unsigned stages);
    return (n / 2 + stages - 1) / stages;
  endfunction

  // -m^{-1} mod 2^64 for an odd m, by Newton iteration x <- x*(2 - m*x).
  // x = m is already correct to 3 bits, each step doubles the correct bits.
  function automatic logic [63:0] neg_inv64(logic [63:0] m0);
    logic [63:0] x;
    x = m0;
    for (int i = 0; i < 5; i++) x = x * (64'd2 - m0 * x);
    return -x;
  endfunction

endpackage
