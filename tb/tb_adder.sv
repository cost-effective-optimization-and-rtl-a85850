// tb_adder: self-checking testbench of the word-serial adder.
//
// N = 256, 64-bit words. Random and carry-heavy operands (all-ones words);
// the sum must equal a+b and arrive NCH+1 cycles after start.
module tb_adder;
  localparam int unsigned N   = 256;
  localparam int unsigned CW  = 64;
  localparam int unsigned NCH = (N + 1 + CW - 1) / CW;

  logic clk = 0, rst_n = 1, start = 0;
  logic [N-1:0] a, b;
  logic [N:0] r;
  logic done, busy;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  initial #1 rst_n = 0;

  adder #(.N(N), .CW(CW)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    a = '0; b = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      for (int j = 0; j < int'(N); j += 32) begin a[j +: 32] = $urandom; b[j +: 32] = $urandom; end
      if (i % 4 == 0) begin a = '1; b = N'(i + 1); end
      if (i % 4 == 1) begin a = '1; b = '1; end
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (r != (N+1)'(a) + (N+1)'(b)) begin failures++; $display("FAIL a=%h b=%h r=%h", a, b, r); end
      checks++;
      if (cyc != NCH + 1) begin failures++; $display("FAIL latency %0d", cyc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
