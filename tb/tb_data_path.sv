// tb_data_path: self-checking testbench of the data path FIFOs.
//
// A random ciphertext stream enters through c_valid/c_ready and is taken by a
// randomly timed in_pop; a random plaintext stream is pushed with out_push
// (only when out_full is low) and drained through m_valid/m_ready with
// random back-pressure. Both streams must come out complete and in order,
// and the full/ready flags must stop traffic (both FIFOs fill at least once).
module tb_data_path;
  localparam int unsigned N = 32, DEPTH = 2, NV = 200;

  logic clk = 0, rst_n = 1;
  logic c_valid = 0, m_ready = 0, in_pop = 0, out_push = 0;
  logic c_ready, m_valid, in_avail, out_full;
  logic [2*N-1:0] c_data, in_data;
  logic [N-1:0] m_data, out_data;
  int checks = 0, failures = 0, in_full_seen = 0, out_full_seen = 0;

  always #5 clk = ~clk;
  initial #1 rst_n = 0;

  data_path #(.N(N), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [2*N-1:0] cval(int i); return {32'(i * 7 + 1), 32'(i ^ 32'h5a5a)}; endfunction
  function automatic logic [N-1:0]   mval(int i); return 32'(i * 13 + 3); endfunction

  int ci = 0, co = 0, mi = 0, mo = 0;

  always @(negedge clk) if (rst_n) begin
    // sample what happened at the previous edge is done in posedge block
    c_valid  = (ci < NV) && ($urandom % 3 != 0);
    c_data   = cval(ci);
    in_pop   = in_avail && ($urandom % 4 == 0);
    out_push = !out_full && (mi < NV) && ($urandom % 2 == 0);
    out_data = mval(mi);
    m_ready  = ($urandom % 5 == 0);
    if (!c_ready) in_full_seen++;
    if (out_full) out_full_seen++;
  end

  always @(posedge clk) if (rst_n) begin
    if (c_valid && c_ready) ci++;
    if (in_pop) begin
      checks++;
      if (in_data != cval(co)) begin failures++; $display("FAIL c %0d", co); end
      co++;
    end
    if (out_push) mi++;
    if (m_valid && m_ready) begin
      checks++;
      if (m_data != mval(mo)) begin failures++; $display("FAIL m %0d", mo); end
      mo++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (co == NV && mo == NV);
    checks++;
    if (in_full_seen == 0 || out_full_seen == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
