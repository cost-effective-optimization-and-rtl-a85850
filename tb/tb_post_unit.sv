// tb_post_unit: self-checking testbench of the postprocessing unit.
//
// 64-bit key. The shared MM_B port is answered by a testbench model that
// returns L*t_R*R^-2 mod n plus n (the largest unreduced value a real MM_B may
// give, so the judgments are exercised) after a fixed delay, and holds
// mmb_free low for a while after the start, as a running preprocessing
// operation would. Inputs are U = c^(p-1) mod p^2, sometimes with p^2 added
// (the case whose judgment the eCRT algorithm removes). The plaintext must
// equal the textbook decryption of c.
module tb_post_unit;
  import tb_math_pkg::*;
  localparam int unsigned N = 64, WORD = 16;
  localparam int unsigned LW = (N + 2 + WORD - 1) / WORD;
  typedef paillier#(N, WORD, 3, 2 * N + 2 * WORD + 8) key_t;
  typedef key_t::bm bm;
  typedef key_t::num_t num_t;

  logic clk = 0, rst_n = 1, start = 0;
  logic [N:0] up, uq, mmb_lp, mmb_lq, mmb_mp, mmb_mq;
  logic [N/2-1:0] p, q;
  logic [N-1:0] n, m;
  logic mmb_start, mmb_free, mmb_done, done, busy;
  int checks = 0, failures = 0, unreduced = 0, mmb_waits = 0;

  always #5 clk = ~clk;
  initial #1 rst_n = 0;

  post_unit #(.N(N), .CW(64)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  key_t k;
  num_t r2inv;
  int free_delay = 0;

  // Shared-multiplier model.
  initial begin
    mmb_done = 0; mmb_mp = '0; mmb_mq = '0; mmb_free = 1;
    forever begin
      @(posedge clk);
      if (start) begin
        mmb_free <= 0;
        repeat (free_delay) @(posedge clk);
        mmb_free <= 1;
      end else if (mmb_start) begin
        num_t a, b;
        a = num_t'(mmb_lp); b = num_t'(mmb_lq);
        repeat (7) @(posedge clk);
        mmb_mp   <= (N+1)'(bm::mulmod(bm::mulmod(a, k.t_pr, k.n), r2inv, k.n) + k.n);
        mmb_mq   <= (N+1)'(bm::mulmod(bm::mulmod(b, k.t_qr, k.n), r2inv, k.n));
        mmb_done <= 1;
        @(posedge clk) mmb_done <= 0;
      end
    end
  end

  // Count cycles where the unit waits for the multipliers.
  always @(posedge clk) if (int'(dut.st_q) == 2 && !mmb_free) mmb_waits++;  // state MMB_REQ

  initial begin
    num_t cc, mm, u1, u2, rr;
    k = new(64'hf2c75357, 64'hc6a3f5bf);
    rr = num_t'(1) << (LW * WORD);
    r2inv = bm::inv(bm::mulmod(rr, rr, k.n), k.n);
    p = (N/2)'(k.p); q = (N/2)'(k.q); n = N'(k.n);
    up = '0; uq = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 40; i++) begin
      mm = bm::rand_below(k.n);
      cc = k.encrypt(mm);
      u1 = bm::powmod(cc, k.p - 1, k.p2);
      u2 = bm::powmod(cc, k.q - 1, k.q2);
      if (i % 3 == 1) begin u1 += k.p2; unreduced++; end
      if (i % 4 == 2) begin u2 += k.q2; unreduced++; end
      up = (N+1)'(u1); uq = (N+1)'(u2);
      free_delay = (i % 2) ? 80 : 0;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      while (!done) @(negedge clk);
      checks++;
      if (num_t'(m) != mm || num_t'(m) != k.decrypt(cc)) begin
        failures++;
        $display("FAIL m=%h expected %h", m, mm);
      end
    end
    checks++;
    if (mmb_waits == 0 || unreduced == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
