// tb_mesa_w1024: the accelerator in its 1024-bit, 12-ME configuration
// (N = 1024, 6 exponentiation stages per branch), the setting whose per-
// operation timing the paper tabulates.
//
// The key is built from two fixed 512-bit primes; all other parameters are
// derived here with plain big-integer arithmetic and written into the
// Cfg_unit. NC ciphertexts, encryptions of random messages, are streamed in
// back to back; each plaintext must equal its message and the textbook
// decryption. The pipeline period is checked against the exponentiation
// stage latency: with the last ME stage occupied, consecutive steps are
// (SEG+1)*(LW+2)+3 cycles apart, i.e. the exponentiation stage alone sets the
// rate and covers the pre- and postprocessing running beside it.
module tb_mesa_w1024;
  import tb_math_pkg::*;
  localparam int unsigned N = 1024, WORD = 16, STAGES = 6, NST = STAGES + 2;
  localparam int unsigned LW  = (N + 2 + WORD - 1) / WORD;
  localparam int unsigned SEG = (N / 2 + STAGES - 1) / STAGES;
  localparam int unsigned DEPTH = mesa_pkg::cfg_depth(STAGES);
  localparam int unsigned AW = mesa_pkg::CFG_AW;
  localparam int unsigned NC = 4;
  localparam int unsigned ME_PERIOD = (SEG + 1) * (LW + 2) + 3;
  typedef paillier#(N, WORD, STAGES, 2 * N + 2 * WORD + 8) key_t;
  typedef key_t::bm bm;
  typedef key_t::num_t num_t;

  logic clk = 0, rst_n = 1, en = 0;
  logic cfg_we = 0, c_valid = 0, m_ready = 1;
  logic [AW-1:0] cfg_waddr;
  logic [N-1:0] cfg_wdata, m_data;
  logic [2*N-1:0] c_data;
  logic c_ready, m_valid, loaded, stall;
  int checks = 0, failures = 0, cyc = 0, last_step = 0, me_steps = 0, outs = 0;
  bit last_me_busy = 0;

  always #5 clk = ~clk;
  initial #1 rst_n = 0;

  mesa_top #(.N(N), .WORD(WORD), .STAGES(STAGES)) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  num_t msgs [$], cts [$];
  key_t key;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dut.step) begin
      if (last_me_busy) begin
        check(cyc - last_step == int'(ME_PERIOD), $sformatf("period %0d, expected %0d", cyc - last_step, ME_PERIOD));
        me_steps++;
      end
      $display("step at cycle %0d, stage_en=%b, previous period %0d cycles", cyc, dut.stage_en, cyc - last_step);
      last_me_busy = dut.stage_en[STAGES];
      last_step = cyc;
    end
    if (m_valid && m_ready) begin
      num_t em, ec;
      em = msgs.pop_front();
      ec = cts.pop_front();
      checks++;
      if (num_t'(m_data) != em || em != key.decrypt(ec)) begin
        failures++;
        $display("FAIL m=%h expected %h", m_data, em);
      end
      outs++;
      $display("plaintext %0d correct at cycle %0d", outs, cyc);
    end
  end

  initial begin
    cfg_waddr = '0; cfg_wdata = '0; c_data = '0;
    key = new({512'hcdbcad73d2c8dff9b66045e1326613474a328701b1e28d739fd05cb32bc5b215da318fc772b8352bab08adb0b344cd6a4d29cf11a885b40f22c5b0a73b0d3569},
              {512'hce66c3e7ac0bf645e09ce90fb913001c8c026d0ad1d06f6645dc69f31b9efb2269ca312642535fc7da71e25beda6a36bd732ded0de60a7d1128a2d1ccea39023});
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < int'(DEPTH); a++) begin
      cfg_waddr = AW'(a); cfg_wdata = N'(key.cfg_word(a)); cfg_we = 1;
      @(negedge clk);
    end
    cfg_we = 0;
    en = 1;
    for (int i = 0; i < int'(NC); i++) begin
      num_t mm, cc;
      mm = bm::rand_below(key.n);
      cc = key.encrypt(mm);
      c_data = (2*N)'(cc);
      c_valid = 1;
      @(negedge clk);
      while (!c_ready) @(negedge clk);
      msgs.push_back(mm);
      cts.push_back(cc);
      c_valid = 0;
    end
    wait (outs == int'(NC));
    check(me_steps > 0, "exponentiation-bound period observed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
