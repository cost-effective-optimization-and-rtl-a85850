// tb_math_pkg: reference big-integer arithmetic for the testbenches.
//
// bigmath#(W) works on W-bit unsigned values with schoolbook methods
// (binary long division, double-and-add modular multiplication, square-and-
// multiply exponentiation), entirely independent of the RTL's Montgomery
// units. Wide / and % are avoided because simulators limit their width.
// It also derives the full Paillier/eCRT parameter set from two primes, the
// precomputation a host would do before loading the Cfg_unit:
//   n = p*q, g = n+1, R = 2^(LW*WORD)
//   y_p = R^3 mod p^2,  one_p = R mod p^2
//   e_p = (L_p(g^(p-1) mod p^2))^-1 mod p,  l_3 = (q^-1 mod p)*q
//   t_p = e_p*l_3 mod n,  t_pR = t_p*R^2 mod n     (same for q)
// and encrypts m as c = g^m * r^n mod n^2.
package tb_math_pkg;

  class bigmath #(int unsigned W = 256);
    typedef logic [W-1:0] num_t;

    // Index of the highest set bit plus one (0 for a = 0).
    static function int unsigned bitlen(num_t a);
      for (int i = int'(W) - 1; i >= 0; i--) if (a[i]) return i + 1;
      return 0;
    endfunction

    // Binary long division: q = a / d, r = a % d (d > 0).
    static function void divmod(num_t a, num_t d, output num_t q, output num_t r);
      logic [W:0] rem;
      q = '0; rem = '0;
      for (int i = int'(bitlen(a)) - 1; i >= 0; i--) begin
        rem = {rem[W-1:0], a[i]};
        if (rem >= {1'b0, d}) begin rem -= {1'b0, d}; q[i] = 1'b1; end
      end
      r = rem[W-1:0];
    endfunction

    static function num_t div(num_t a, num_t d);
      num_t q, r;
      divmod(a, d, q, r);
      return q;
    endfunction

    static function num_t mod(num_t a, num_t m);
      num_t q, r;
      divmod(a, m, q, r);
      return r;
    endfunction

    // a*b mod m by double-and-add (a, b reduced first).
    static function num_t mulmod(num_t a, num_t b, num_t m);
      logic [W:0] r;
      num_t x;
      x = (a < m) ? a : mod(a, m);
      if (b >= m) b = mod(b, m);
      r = '0;
      for (int i = int'(bitlen(b)) - 1; i >= 0; i--) begin
        r = r << 1;
        if (r >= {1'b0, m}) r -= {1'b0, m};
        if (b[i]) begin
          r += {1'b0, x};
          if (r >= {1'b0, m}) r -= {1'b0, m};
        end
      end
      return r[W-1:0];
    endfunction

    static function num_t powmod(num_t a, num_t e, num_t m);
      num_t r, x;
      r = mod(num_t'(1), m);
      x = mod(a, m);
      for (int i = int'(bitlen(e)) - 1; i >= 0; i--) begin
        r = mulmod(r, r, m);
        if (e[i]) r = mulmod(r, x, m);
      end
      return r;
    endfunction

    // Inverse of a modulo m (gcd(a, m) = 1) by the extended Euclidean algorithm.
    static function num_t inv(num_t a, num_t m);
      num_t r0, r1, t0, t1, qq, rr, tt;
      r0 = m; r1 = mod(a, m); t0 = '0; t1 = num_t'(1);
      while (r1 != '0) begin
        divmod(r0, r1, qq, rr);
        tt = mod(t0 + m - mulmod(qq, t1, m), m);
        r0 = r1; r1 = rr; t0 = t1; t1 = tt;
      end
      return t0;
    endfunction

    // Inverse modulo a prime p, by Fermat: a^(p-2) mod p.
    static function num_t inv_prime(num_t a, num_t p);
      return powmod(a, p - 2, p);
    endfunction

    // Uniform-ish random value below m.
    static function num_t rand_below(num_t m);
      num_t x;
      for (int i = 0; i < int'(W); i++) x[i] = 1'($urandom);
      return mod(x, m);
    endfunction

    // Random odd value of exactly `bits` bits.
    static function num_t rand_odd(int unsigned bits);
      num_t x;
      x = '0;
      for (int i = 0; i < int'(bits); i++) x[i] = 1'($urandom);
      x[bits-1] = 1'b1;
      x[0] = 1'b1;
      return x;
    endfunction
  endclass

  // All values the Cfg_unit holds for one key, plus helpers.
  // W must be at least 2*N + 2*WORD + 8 (room for n^2 and R^3).
  class paillier #(int unsigned N = 64, int unsigned WORD = 16, int unsigned STAGES = 3,
                   int unsigned W = 168);
    typedef bigmath#(W) bm;
    typedef logic [W-1:0] num_t;

    num_t p, q, n, n2, p2, q2, rr, g;
    num_t y_p, y_q, one_p, one_q, t_pr, t_qr, lam, mu;
    num_t hp [STAGES], hq [STAGES];

    function new(num_t pp, num_t qq);
      num_t e_p, e_q, l3, l4, t_p, t_q, x;
      int unsigned LW, SEG;
      LW  = (N + 2 + WORD - 1) / WORD;
      SEG = (N / 2 + STAGES - 1) / STAGES;
      if (W < 2 * N + 2 * WORD + 8) $fatal(1, "paillier: W too small");
      p = pp; q = qq;
      n = p * q; n2 = n * n; p2 = p * p; q2 = q * q; g = n + 1;
      rr = num_t'(1) << (LW * WORD);
      one_p = bm::mod(rr, p2);  one_q = bm::mod(rr, q2);
      y_p = bm::mulmod(bm::mulmod(one_p, one_p, p2), one_p, p2);
      y_q = bm::mulmod(bm::mulmod(one_q, one_q, q2), one_q, q2);
      x   = bm::powmod(g, p - 1, p2);  e_p = bm::inv_prime(bm::div(x - 1, p), p);
      x   = bm::powmod(g, q - 1, q2);  e_q = bm::inv_prime(bm::div(x - 1, q), q);
      l3  = bm::inv_prime(q, p) * q;
      l4  = bm::inv_prime(p, q) * p;
      t_p = bm::mulmod(e_p, l3, n);    t_q = bm::mulmod(e_q, l4, n);
      t_pr = bm::mulmod(t_p, bm::mulmod(rr, rr, n), n);
      t_qr = bm::mulmod(t_q, bm::mulmod(rr, rr, n), n);
      for (int j = 0; j < int'(STAGES); j++) begin
        hp[j] = ((p - 1) >> (j * SEG)) & ((num_t'(1) << SEG) - 1);
        hq[j] = ((q - 1) >> (j * SEG)) & ((num_t'(1) << SEG) - 1);
      end
      // Textbook key for the independent reference decryption.
      lam = lcm(p - 1, q - 1);
      mu  = inv_n(bm::div(bm::powmod(g, lam, n2) - 1, n));
    endfunction

    static function num_t gcd(num_t a, num_t b);
      num_t t;
      while (b != '0) begin t = bm::mod(a, b); a = b; b = t; end
      return a;
    endfunction

    static function num_t lcm(num_t a, num_t b);
      return bm::div(a, gcd(a, b)) * b;
    endfunction

    // Inverse modulo n = p*q: inverses modulo p and q joined by the CRT.
    function num_t inv_n(num_t a);
      num_t x, y;
      x = bm::inv_prime(bm::mod(a, p), p);
      y = bm::inv_prime(bm::mod(a, q), q);
      return x + p * bm::mulmod((y + q - bm::mod(x, q)), bm::inv_prime(p, q), q);
    endfunction

    // c = g^m * r^n mod n^2 with a random unit r.
    function num_t encrypt(num_t m);
      num_t r;
      do r = bm::rand_below(n); while (r == '0 || gcd(r, n) != num_t'(1));
      return bm::mulmod(num_t'(1) + m * n, bm::powmod(r, n, n2), n2);
    endfunction

    // Textbook decryption m = L(c^lambda mod n^2) * mu mod n.
    function num_t decrypt(num_t c);
      return bm::mulmod(bm::div(bm::powmod(c, lam, n2) - 1, n), mu, n);
    endfunction

    // Cfg_unit word at address a (mesa_pkg address map).
    function num_t cfg_word(int unsigned a);
      case (a)
        0: return p2;     1: return q2;
        2: return y_p;    3: return y_q;
        4: return one_p;  5: return one_q;
        6: return p;      7: return q;
        8: return t_pr;   9: return t_qr;
        10: return n;
        default: begin
          int unsigned j;
          j = (a - 11) / 2;
          return (a % 2 == 1) ? hp[j] : hq[j];
        end
      endcase
    endfunction
  endclass

endpackage
