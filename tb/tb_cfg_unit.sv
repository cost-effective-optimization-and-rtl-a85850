// tb_cfg_unit: self-checking testbench of the parameter RAM.
//
// Fills every entry with a distinct pattern, then reads all of them back in
// random order, checking that read data appears exactly one cycle after the
// read request and that writes to one entry leave the others unchanged.
module tb_cfg_unit;
  localparam int unsigned N = 128, STAGES = 3;
  localparam int unsigned DEPTH = mesa_pkg::cfg_depth(STAGES);
  localparam int unsigned AW = mesa_pkg::CFG_AW;

  logic clk = 0, we = 0, re = 0;
  logic [AW-1:0] waddr, raddr;
  logic [N-1:0] wdata, rdata;
  logic [N-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  cfg_unit #(.N(N), .STAGES(STAGES)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    waddr = '0; raddr = '0; wdata = '0;
    for (int round = 0; round < 4; round++) begin
      for (int a = 0; a < int'(DEPTH); a++) begin
        if (round > 0 && ($urandom % 2)) continue;
        for (int j = 0; j < int'(N); j += 32) wdata[j +: 32] = $urandom;
        model[a] = wdata;
        waddr = AW'(a);
        @(negedge clk) we = 1;
        @(negedge clk) we = 0;
      end
      for (int i = 0; i < 3 * int'(DEPTH); i++) begin
        int a;
        a = $urandom_range(0, DEPTH - 1);
        raddr = AW'(a);
        re = 1;
        @(negedge clk);
        re = 0;
        raddr = AW'((a + 1) % DEPTH);
        checks++;
        if (rdata != model[a]) begin failures++; $display("FAIL addr %0d", a); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
