// tb_me_pipeline: self-checking testbench of the pipelined exponentiation unit.
//
// 64-bit key, 3 stages. Ciphertexts are converted to the Montgomery domain in
// the testbench (S = c*R mod p^2, computed with plain arithmetic) and pushed
// through the stages in lockstep like the control unit does: at each step
// every stage holding data starts on the same edge, and a new value enters
// stage 1. After its third stage a value must equal c^(p-1) mod p^2
// (or that plus p^2), and likewise for q. Every step must take exactly the
// last stage's latency, (SEG+1)*(LW+2)+1 cycles, once the last stage is busy.
module tb_me_pipeline;
  import tb_math_pkg::*;
  localparam int unsigned N = 64, WORD = 16, STAGES = 3;
  localparam int unsigned LW  = (N + 2 + WORD - 1) / WORD;
  localparam int unsigned SEG = (N / 2 + STAGES - 1) / STAGES;
  localparam int unsigned NC  = 6;
  typedef paillier#(N, WORD, STAGES, 2 * N + 2 * WORD + 8) key_t;
  typedef key_t::bm bm;
  typedef key_t::num_t num_t;

  logic clk = 0, rst_n = 1;
  logic [STAGES-1:0] start = '0;
  logic [N:0] sp, sq, up, uq;
  logic [N-1:0] one_p, one_q, p2, q2;
  logic [SEG-1:0] hp [STAGES], hq [STAGES];
  logic busy;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  initial #1 rst_n = 0;

  me_pipeline #(.N(N), .WORD(WORD), .STAGES(STAGES)) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
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
    num_t cs [NC + STAGES];
    num_t rr;
    logic [STAGES-1:0] vld;
    int cyc;
    k = new(64'hf2c75357, 64'hc6a3f5bf);
    rr = num_t'(1) << (LW * WORD);
    one_p = N'(k.one_p); one_q = N'(k.one_q); p2 = N'(k.p2); q2 = N'(k.q2);
    for (int j = 0; j < int'(STAGES); j++) begin hp[j] = SEG'(k.hp[j]); hq[j] = SEG'(k.hq[j]); end
    for (int i = 0; i < NC; i++) cs[i] = bm::rand_below(k.n2);
    vld = '0; sp = '0; sq = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < NC + STAGES; t++) begin
      // present stage-1 input (the preprocessing result) and step
      vld = {vld[STAGES-2:0], t < NC};
      if (t < NC) begin
        sp = (N+1)'(bm::mulmod(cs[t], rr, k.p2));
        sq = (N+1)'(bm::mulmod(cs[t], rr, k.q2));
      end
      @(negedge clk) start = vld;
      @(negedge clk) start = '0;
      cyc = 1;
      while (busy) begin @(negedge clk); cyc++; end
      if (vld[STAGES-1]) begin
        check(cyc == int'((SEG + 1) * (LW + 2) + 1), $sformatf("step latency %0d", cyc));
        check(num_t'(up) % k.p2 == bm::powmod(cs[t-STAGES+1], k.p - 1, k.p2) && num_t'(up) < 2 * k.p2, "U_p");
        check(num_t'(uq) % k.q2 == bm::powmod(cs[t-STAGES+1], k.q - 1, k.q2) && num_t'(uq) < 2 * k.q2, "U_q");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
