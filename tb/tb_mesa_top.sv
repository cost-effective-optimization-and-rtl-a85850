// tb_mesa_top: end-to-end testbench of the accelerator at reduced size.
//
// 64-bit keys (N = 64), 3 exponentiation stages, 16-bit CIOS words. For each
// of two keys the testbench writes the precomputed parameters into the
// Cfg_unit, raises En, streams random encryptions through the ciphertext port
// with random gaps, and reads plaintexts with random back-pressure. Every
// plaintext must equal its message (and the textbook decryption), in order.
// Between the keys En is dropped, the pipeline drains and the parameters are
// reloaded. Mechanisms counted, each of which must happen at least once:
// pipeline bubbles, a completely full pipeline, output stalls, parameter
// reloads for a new key, and the final modular-addition subtraction.
// The pipeline period is checked too: without an output stall, consecutive
// steps are exactly the PE's busy time plus 3 control cycles apart. (At this
// small size the slowest stage is the pre/post pair sharing the MM_B; the
// full-size testbench checks the exponentiation-bound period.)
module tb_mesa_top;
  import tb_math_pkg::*;
  localparam int unsigned N = 64, WORD = 16, STAGES = 3, NST = STAGES + 2;
  localparam int unsigned DEPTH = mesa_pkg::cfg_depth(STAGES);
  localparam int unsigned AW = mesa_pkg::CFG_AW;
  localparam int unsigned NC = 14;
  typedef paillier#(N, WORD, STAGES, 2 * N + 2 * WORD + 8) key_t;
  typedef key_t::bm bm;
  typedef key_t::num_t num_t;

  logic clk = 0, rst_n = 1, en = 0;
  logic cfg_we = 0, c_valid = 0, m_ready = 0;
  logic [AW-1:0] cfg_waddr;
  logic [N-1:0] cfg_wdata, m_data;
  logic [2*N-1:0] c_data;
  logic c_ready, m_valid, loaded, stall;
  int checks = 0, failures = 0;
  int bubbles = 0, full_steps = 0, stalls = 0, reloads = 0, final_sub = 0, judge_sub = 0;
  int last_step = 0, cyc = 0, full_period = -1;
  bit stalled = 0, prev_full = 0;
  int busy_cyc = 0;

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

  // Mechanism counters (observed at the internal control/datapath signals).
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dut.pe_busy) busy_cyc++;
    if (dut.step) begin
      if (!dut.stage_en[0]) bubbles++;
      if (!stalled && last_step > 0)
        check(cyc - last_step == busy_cyc + 3, "period = PE busy time + 3");
      if (prev_full && !stalled) begin
        if (full_period < 0 || cyc - last_step > full_period) full_period = cyc - last_step;
        full_steps++;
      end
      prev_full = &dut.stage_en;
      busy_cyc = 0;
      last_step = cyc;
      stalled = 0;
    end
    if (stall) begin stalls++; stalled = 1; end
    if (!dut.pe_rst_n && en) begin reloads++; last_step = 0; end
    if (dut.u_pe.u_post.u_cs_fin.done && dut.u_pe.u_post.u_cs_fin.ge) final_sub++;
    if (dut.u_pe.u_post.u_cs_p.done && dut.u_pe.u_post.u_cs_p.ge) judge_sub++;
  end

  num_t msgs [$], cts [$];
  key_t key;

  // Output side: random back-pressure, in-order checking.
  initial begin
    forever begin
      @(negedge clk);
      // long pauses of the reader fill the output FIFO and stall the pipeline
      m_ready = (cyc % 4000 >= 2500) && ($urandom % 4 == 0);
    end
  end
  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    num_t em, ec;
    em = msgs.pop_front();
    ec = cts.pop_front();
    checks++;
    if (num_t'(m_data) != em || em != key.decrypt(ec)) begin
      failures++;
      $display("FAIL m=%h expected %h", m_data, em);
    end
  end

  initial begin
    num_t ps [2], qs [2];
    ps[0] = 64'hf2c75357; qs[0] = 64'hc6a3f5bf;
    ps[1] = 64'hc28753f9; qs[1] = 64'hcff41e8d;
    cfg_waddr = '0; cfg_wdata = '0; c_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int kk = 0; kk < 2; kk++) begin
      key = new(ps[kk], qs[kk]);
      for (int a = 0; a < int'(DEPTH); a++) begin
        cfg_waddr = AW'(a); cfg_wdata = N'(key.cfg_word(a)); cfg_we = 1;
        @(negedge clk);
      end
      cfg_we = 0;
      en = 1;
      for (int i = 0; i < int'(NC); i++) begin
        num_t mm, cc;
        // a pause now and then leaves bubbles in the pipeline
        if (i == 9) repeat (1500) @(negedge clk);
        mm = (i == 0) ? '0 : (i == 1) ? key.n - 1 : bm::rand_below(key.n);
        cc = key.encrypt(mm);
        c_data = (2*N)'(cc);
        c_valid = 1;
        @(negedge clk);
        while (!c_ready) @(negedge clk);
        // transferred at the previous edge
        msgs.push_back(mm);
        cts.push_back(cc);
        c_valid = 0;
      end
      wait (msgs.size() == 0);
      @(negedge clk);
      en = 0;
      repeat (50) @(negedge clk);
    end
    $display("bubbles=%0d full_steps=%0d stalls=%0d reloads=%0d final_sub=%0d judge_sub=%0d max_full_period=%0d",
             bubbles, full_steps, stalls, reloads, final_sub, judge_sub, full_period);
    check(bubbles > 0, "bubble coverage");
    check(full_steps > 0, "full pipeline coverage");
    check(stalls > 0, "stall coverage");
    check(reloads == 2, "reload coverage");
    check(final_sub > 0, "final subtraction coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
