// tb_mm_b: self-checking testbench of the radix-2 Montgomery multiplier (mm_b).
//
// Random odd moduli m of N bits, 2N-bit multipliers a and b < m (the ranges
// the pre- and postprocessing use). Each result r is checked against the
// defining property r*R^2 = a*b (mod m) with r < 2m, using plain big-integer arithmetic,
// and the latency from start to done must be LW*WORD+1 cycles.
module tb_mm_b;
  import tb_math_pkg::*;
  localparam int unsigned N    = 64;
  localparam int unsigned WORD = 16;
  localparam int unsigned LW   = (N + 2 + WORD - 1) / WORD;
  localparam int unsigned LAT  = 2*LW*WORD+1;
  localparam int unsigned W    = 2 * N + 2 * WORD + 8;
  typedef bigmath#(W) bm;
  typedef logic [W-1:0] num_t;

  logic clk = 0, rst_n = 1, start = 0;
  initial #1 rst_n = 0;
  logic [2*N-1:0] a;
  logic [N:0] b, r;
  logic [N-1:0] m;
  logic done, busy;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  mm_b #(.N(N), .WORD(WORD)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(num_t aa, num_t bb, num_t mm);
    num_t rr, lhs, rhs;
    int cyc;
    a = (2*N)'(aa); b = (N+1)'(bb); m = N'(mm);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    rr  = num_t'(r);
    rhs = bm::mulmod(aa, bb, mm);
    lhs = bm::mulmod(rr, num_t'(1) << (2 * LW * WORD), mm);
    checks++;
    if (lhs != rhs || rr >= 2 * mm) begin
      failures++;
      $display("FAIL a=%h b=%h m=%h r=%h", aa, bb, mm, rr);
    end
    checks++;
    if (cyc != int'(LAT)) begin
      failures++;
      $display("FAIL latency %0d, expected %0d", cyc, LAT);
    end
  endtask

  initial begin
    num_t mm;
    a = '0; b = '0; m = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      mm = bm::rand_odd(N - (i % 3));
      run(bm::rand_below(num_t'(1) << (2 * N)), bm::rand_below(mm), mm);
    end
    // Corner values: largest operands, zero, one.
    mm = bm::rand_odd(N);
    run((num_t'(1) << (2 * N)) - 1, mm - 1, mm);
    run('0, mm - 1, mm);
    run(1, 1, mm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
