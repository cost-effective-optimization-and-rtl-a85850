// tb_div_unit: self-checking testbench of the L-function divider.
//
// Random N/2-bit divisors d and dividends u < 2*d^2, among them values of the
// form u = 1 + k*d as the L function sees them. The quotient must equal
// u / d computed with the / operator, after N/2+2 cycles.
module tb_div_unit;
  import tb_math_pkg::*;
  localparam int unsigned N  = 64;
  localparam int unsigned W  = 2 * N + 8;
  typedef bigmath#(W) bm;
  typedef logic [W-1:0] num_t;

  logic clk = 0, rst_n = 1, start = 0;
  logic [N:0] u;
  logic [N/2-1:0] d;
  logic [N/2:0] q;
  logic done, busy;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  initial #1 rst_n = 0;

  div_unit #(.N(N)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    num_t dd, uu;
    int cyc;
    u = '0; d = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      dd = bm::rand_odd(N / 2);
      case (i % 3)
        0: uu = bm::rand_below(2 * dd * dd);
        1: uu = 1 + bm::rand_below(2 * dd) * dd;
        default: uu = 2 * dd * dd - 1 - (i % 5);
      endcase
      u = (N+1)'(uu); d = (N/2)'(dd);
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (num_t'(q) != uu / dd) begin
        failures++;
        $display("FAIL u=%h d=%h q=%h", uu, dd, q);
      end
      checks++;
      if (cyc != N / 2 + 2) begin failures++; $display("FAIL latency %0d", cyc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
