// tb_pe: self-checking testbench of the processing element.
//
// 64-bit key, 3 exponentiation stages (5 pipeline stages). The testbench loads
// the parameters through the PE's parameter port and sequences steps like the
// control unit: at each step all occupied stages start together and a new
// ciphertext enters stage 1 (with a bubble now and then). Each plaintext that
// leaves stage 5 must equal the message the ciphertext was encrypted from and
// the textbook decryption; results must come out in order, 5 steps after
// their ciphertext went in.
module tb_pe;
  import tb_math_pkg::*;
  localparam int unsigned N = 64, WORD = 16, STAGES = 3, NST = STAGES + 2;
  localparam int unsigned DEPTH = mesa_pkg::cfg_depth(STAGES);
  localparam int unsigned AW = mesa_pkg::CFG_AW;
  localparam int unsigned NC = 12;
  typedef paillier#(N, WORD, STAGES, 2 * N + 2 * WORD + 8) key_t;
  typedef key_t::bm bm;
  typedef key_t::num_t num_t;

  logic clk = 0, rst_n = 1;
  logic prm_we = 0, step = 0;
  logic [AW-1:0] prm_addr;
  logic [N-1:0] prm_data, m_out;
  logic [NST-1:0] stage_en = '0;
  logic [2*N-1:0] c_in;
  logic busy;
  int checks = 0, failures = 0, bubbles = 0;

  always #5 clk = ~clk;
  initial #1 rst_n = 0;

  pe #(.N(N), .WORD(WORD), .STAGES(STAGES)) dut (.*);

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    key_t k;
    num_t msg [$], cts [$], exp_m;
    logic [NST-1:0] vld;
    int sent;
    k = new(64'hf2c75357, 64'hc6a3f5bf);
    prm_addr = '0; prm_data = '0; c_in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < int'(DEPTH); a++) begin
      prm_addr = AW'(a); prm_data = N'(k.cfg_word(a)); prm_we = 1;
      @(negedge clk);
    end
    prm_we = 0;
    vld = '0; sent = 0;
    while (sent < int'(NC) || vld != '0) begin
      logic tk;
      tk = (sent < int'(NC)) && (sent % 5 != 3 || bubbles > 3 * sent);
      if (sent < int'(NC) && !tk) bubbles++;
      vld = {vld[NST-2:0], tk};
      if (tk) begin
        num_t mm;
        mm = bm::rand_below(k.n);
        msg.push_back(mm);
        cts.push_back(k.encrypt(mm));
        c_in = (2*N)'(cts[$]);
        sent++;
      end
      stage_en = vld;
      step = 1;
      @(negedge clk);
      step = 0;
      while (busy) @(negedge clk);
      if (vld[NST-1]) begin
        exp_m = msg.pop_front();
        checks++;
        if (num_t'(m_out) != exp_m || exp_m != k.decrypt(cts.pop_front())) begin
          failures++;
          $display("FAIL m=%h expected %h", m_out, exp_m);
        end
      end
    end
    checks++;
    if (bubbles == 0 || msg.size() != 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
