// tb_pre_unit: self-checking testbench of the preprocessing unit.
//
// With a real 64-bit Paillier key, a pre operation must return
// S_p = c*R mod p^2 and S_q = c*R mod q^2 (up to one extra modulus) for
// random ciphertexts c < n^2, and a post operation on the same multipliers
// must return m_p = L*t_pR*R^-2 (mod n), below 2n. A pre operation takes
// 2*LW*WORD+2 cycles, a post operation one less; S_p/S_q must not change during a post operation.
module tb_pre_unit;
  import tb_math_pkg::*;
  localparam int unsigned N = 64, WORD = 16;
  localparam int unsigned LW = (N + 2 + WORD - 1) / WORD;
  typedef paillier#(N, WORD, 3, 2 * N + 2 * WORD + 8) key_t;
  typedef key_t::bm bm;
  typedef key_t::num_t num_t;

  logic clk = 0, rst_n = 1;
  logic pre_start = 0, post_start = 0;
  logic [2*N-1:0] c;
  logic [N-1:0] y_p, y_q, p2, q2, t_pr, t_qr, n;
  logic [N:0] sp, sq, l_p, l_q, mp, mq;
  logic pre_done, post_done, busy;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  initial #1 rst_n = 0;

  pre_unit #(.N(N), .WORD(WORD)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    key_t k;
    num_t cc, rr, lp, lq, sp_keep;
    int cyc;
    k = new(64'hf2c75357, 64'hc6a3f5bf);
    rr = num_t'(1) << (LW * WORD);
    c = '0; l_p = '0; l_q = '0;
    y_p = N'(k.y_p); y_q = N'(k.y_q); p2 = N'(k.p2); q2 = N'(k.q2);
    t_pr = N'(k.t_pr); t_qr = N'(k.t_qr); n = N'(k.n);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 30; i++) begin
      cc = bm::rand_below(k.n2);
      c = (2*N)'(cc);
      @(negedge clk) pre_start = 1;
      @(negedge clk) pre_start = 0;
      cyc = 1;
      while (!pre_done) begin @(negedge clk); cyc++; end
      check(cyc == int'(2 * LW * WORD + 2), $sformatf("pre latency %0d", cyc));
      check(num_t'(sp) % k.p2 == bm::mulmod(cc, rr, k.p2) && num_t'(sp) < 2 * k.p2, "S_p");
      check(num_t'(sq) % k.q2 == bm::mulmod(cc, rr, k.q2) && num_t'(sq) < 2 * k.q2, "S_q");
      sp_keep = num_t'(sp);
      lp = bm::rand_below(2 * k.p);
      lq = bm::rand_below(2 * k.q);
      l_p = (N+1)'(lp); l_q = (N+1)'(lq);
      @(negedge clk) post_start = 1;
      @(negedge clk) post_start = 0;
      cyc = 1;
      while (!post_done) begin @(negedge clk); cyc++; end
      check(cyc == int'(2 * LW * WORD + 1), $sformatf("post latency %0d", cyc));
      check(num_t'(mp) % k.n == bm::mulmod(lp, bm::mulmod(k.t_pr, bm::inv(bm::mulmod(rr, rr, k.n), k.n), k.n), k.n)
            && num_t'(mp) < 2 * k.n, "m_p");
      check(num_t'(mq) % k.n == bm::mulmod(lq, bm::mulmod(k.t_qr, bm::inv(bm::mulmod(rr, rr, k.n), k.n), k.n), k.n)
            && num_t'(mq) < 2 * k.n, "m_q");
      check(num_t'(sp) == sp_keep, "S_p held during post");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
