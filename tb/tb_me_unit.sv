// tb_me_unit: self-checking testbench of the segment exponentiation unit.
//
// Two me_unit instances share the inputs: one intermediate stage (FINAL=0)
// and one last stage (FINAL=1). For random odd moduli m, bases a and SEG-bit
// exponents b, the ladder starts from S = R mod m, Z = a*R mod m. Checked,
// with plain big-integer arithmetic: the intermediate stage leaves
// S = a^b*R and Z = a^(b+1)*R (mod m); the last stage returns a^b mod m,
// not above m. Latencies: SEG*(LW+2)+1 and (SEG+1)*(LW+2)+1 cycles.
module tb_me_unit;
  import tb_math_pkg::*;
  localparam int unsigned N    = 64;
  localparam int unsigned WORD = 16;
  localparam int unsigned SEG  = 11;
  localparam int unsigned LW   = (N + 2 + WORD - 1) / WORD;
  localparam int unsigned W    = 2 * N + 2 * WORD + 8;
  typedef bigmath#(W) bm;
  typedef logic [W-1:0] num_t;

  logic clk = 0, rst_n = 1, start = 0;
  logic [N:0] s_in, z_in, s0, z0, s1, z1;
  logic [SEG-1:0] b_in;
  logic [N-1:0] m;
  logic done0, done1, busy0, busy1;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  initial #1 rst_n = 0;

  me_unit #(.N(N), .WORD(WORD), .SEG(SEG), .FINAL(1'b0)) dut_mid (
    .clk, .rst_n, .start, .s_in, .z_in, .b_in, .m, .s_out(s0), .z_out(z0), .done(done0), .busy(busy0));
  me_unit #(.N(N), .WORD(WORD), .SEG(SEG), .FINAL(1'b1)) dut_last (
    .clk, .rst_n, .start, .s_in, .z_in, .b_in, .m, .s_out(s1), .z_out(z1), .done(done1), .busy(busy1));

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    num_t mm, aa, bb, rr, rinv;
    int cyc, c0;
    s_in = '0; z_in = '0; b_in = '0; m = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 40; i++) begin
      mm = bm::rand_odd(N - (i % 2));
      aa = bm::rand_below(mm);
      bb = (i == 0) ? '0 : (i == 1) ? num_t'((1 << SEG) - 1) : num_t'($urandom_range(0, (1 << SEG) - 1));
      rr = (num_t'(1) << (LW * WORD)) % mm;
      rinv = bm::inv(rr, mm);
      s_in = (N+1)'(rr);
      z_in = (N+1)'(bm::mulmod(aa, rr, mm));
      b_in = SEG'(bb);
      m    = N'(mm);
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cyc = 1; c0 = 0;
      while (!done1) begin
        if (done0) c0 = cyc;
        @(negedge clk); cyc++;
      end
      check(c0 == int'(SEG * (LW + 2) + 1), $sformatf("mid latency %0d", c0));
      check(cyc == int'((SEG + 1) * (LW + 2) + 1), $sformatf("last latency %0d", cyc));
      check(bm::mulmod(num_t'(s0), rinv, mm) == bm::powmod(aa, bb, mm), "mid S");
      check(bm::mulmod(num_t'(z0), rinv, mm) == bm::powmod(aa, bb + 1, mm), "mid Z");
      check(num_t'(s1) % mm == bm::powmod(aa, bb, mm) && num_t'(s1) <= mm, "last S");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
