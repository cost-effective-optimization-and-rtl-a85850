// tb_mesa_full: full-size run of the accelerator with its default parameters
// (2048-bit key, 3 exponentiation stages, 16-bit CIOS words).
//
// The key is built from two fixed 1024-bit primes; all other parameters are
// derived here with plain big-integer arithmetic and written into the
// Cfg_unit. NC ciphertexts, encryptions of random messages, are streamed in
// back to back; each plaintext must equal its message and the textbook
// decryption. The pipeline period is checked against the exponentiation
// stage latency: with the last ME stage occupied, consecutive steps are
// (SEG+1)*(LW+2)+3 cycles apart, i.e. the exponentiation stage alone sets the
// rate and covers the pre- and postprocessing running beside it.
module tb_mesa_full;
  import tb_math_pkg::*;
  localparam int unsigned N = 2048, WORD = 16, STAGES = 3, NST = STAGES + 2;
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

  mesa_top dut (.*);

  initial begin
    repeat (2000000) @(posedge clk);
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
    key = new({1024'hd663bd4032d039570adfceeff3691c0ad901af297412df0e83a2c2ea76f17a6ac74760acb4fdcbfd87cee6999cb790e302cd50bee1c22e2a7ec3ae4fccd2617519642f6f91f1abe78deedc78192125c7b213e3821cd30d79c3b84e4d7b95b70787a07f97a201e9d6da47bd476e7678bb38122a5af294a5ad934dbf6dcb3597fd},
              {1024'hede905412fec41a8af6c72026f42ba92e0b5ad94d6dd635a02a1c29acde0aab591eecfd03777697122a1deb32a12fd9009b637e1324d9f6ce2de2f005869ab52426db10559d326c6b40b8d6bc586cf96833e71df16ece51d35fea0584f131ee3c5e4711c1661f4d8079d1d738cb2d20b62de1b07faef7d9079891871a579516f});
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
