// tb_com_sub: self-checking testbench of the comparator/subtractor.
//
// N = 256 with 64-bit words (NCH = 5). Operands a < 2m are drawn so that the
// first differing word from the top varies, including a = m and a = m-1.
// Checked: r = a >= m ? a-m : a, the ge flag, and the latency: k+1 cycles
// when a < m and k+NCH+1 when a >= m, k being the number of words the compare
// examines (worked out here from the operands).
module tb_com_sub;
  import tb_math_pkg::*;
  localparam int unsigned N   = 256;
  localparam int unsigned CW  = 64;
  localparam int unsigned NCH = (N + 1 + CW - 1) / CW;
  localparam int unsigned W   = 2 * N + 8;
  typedef bigmath#(W) bm;
  typedef logic [W-1:0] num_t;

  logic clk = 0, rst_n = 1, start = 0;
  logic [N:0] a, r;
  logic [N-1:0] m;
  logic ge, done, busy;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  initial #1 rst_n = 0;

  com_sub #(.N(N), .CW(CW)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    num_t mm, aa, exp_r;
    int cyc, k, exp_cyc;
    logic [NCH*CW-1:0] ax, mx;
    a = '0; m = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      mm = bm::rand_odd(N - (i % 2));
      case (i % 6)
        0: aa = mm;
        1: aa = mm - 1;
        2: aa = mm + ((num_t'(1) << ($urandom_range(0, N - 1))));  // differs low/high
        3: aa = mm - ((num_t'(1) << ($urandom_range(0, N - 1))) % mm);
        default: aa = bm::rand_below(2 * mm);
      endcase
      if (aa >= 2 * mm) aa = mm;
      a = (N+1)'(aa); m = N'(mm);
      ax = (NCH*CW)'(aa); mx = (NCH*CW)'(mm);
      k = NCH;
      for (int j = NCH - 1; j >= 0; j--)
        if (ax[j*CW +: CW] != mx[j*CW +: CW]) begin k = NCH - j; break; end
      exp_cyc = (aa >= mm) ? k + NCH + 1 : k + 1;
      exp_r   = (aa >= mm) ? aa - mm : aa;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (num_t'(r) != exp_r || ge != (aa >= mm)) begin
        failures++;
        $display("FAIL a=%h m=%h r=%h", aa, mm, r);
      end
      checks++;
      if (cyc != exp_cyc) begin failures++; $display("FAIL latency %0d exp %0d", cyc, exp_cyc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
