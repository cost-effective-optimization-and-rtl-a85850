// tb_control_unit: self-checking testbench of the control unit.
//
// The PE is modelled by a busy flag that stays high for a random number of
// cycles after each step; input availability and output-FIFO fullness are
// random. Checked against a reference model kept in the testbench:
//  - after En the parameter load reads every Cfg_unit address once, in order,
//    and forwards each to the PE one cycle later; the PE reset pulses first;
//  - no step while the PE is busy or before the load has finished;
//  - stage_en at each step equals the reference valid-bit shift register
//    (a new ciphertext enters exactly when one is available and En is high);
//  - in_pop happens only at steps, out_push only when the last stage held a
//    ciphertext and the output FIFO had room, stall only when it had none;
//  - with En low the pipeline drains, every taken ciphertext is pushed out,
//    and a new En reloads the parameters.
// Bubbles, stalls and the reload must each occur at least once.
module tb_control_unit;
  localparam int unsigned STAGES = 3;
  localparam int unsigned NST = STAGES + 2;
  localparam int unsigned DEPTH = mesa_pkg::cfg_depth(STAGES);
  localparam int unsigned AW = mesa_pkg::CFG_AW;

  logic clk = 0, rst_n = 1, en = 0;
  logic cfg_re, pe_rst_n, prm_we, step, in_pop, out_push, loaded, stall;
  logic [AW-1:0] cfg_raddr, prm_addr;
  logic [NST-1:0] stage_en;
  logic pe_busy = 0, in_avail = 0, out_full = 0;
  int checks = 0, failures = 0;
  int bubbles = 0, stalls = 0, loads = 0, taken = 0, pushed = 0;

  always #5 clk = ~clk;
  initial #1 rst_n = 0;

  control_unit #(.STAGES(STAGES)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  logic [NST-1:0] ref_vld = '0;
  int busy_left = 0, next_rd = 0, next_wr = 0;
  bit in_load = 0, prev_re = 0;
  logic [AW-1:0] prev_raddr;

  // Checks on every rising edge (signals are stable from the negedge before).
  always @(posedge clk) if (rst_n) begin
    if (!pe_rst_n && en) begin
      check(next_rd == 0 || next_rd == int'(DEPTH), "PE reset only at load start");
      in_load = 1; next_rd = 0; next_wr = 0; loads++;
    end
    if (cfg_re) begin
      check(int'(cfg_raddr) == next_rd, "load address order");
      next_rd++;
    end
    if (prm_we) begin
      check(prev_re && prm_addr == prev_raddr && int'(prm_addr) == next_wr, "parameter forwarding");
      next_wr++;
    end
    prev_re = cfg_re; prev_raddr = cfg_raddr;
    if (step) begin
      logic tk;
      check(!pe_busy, "no step while busy");
      check(next_wr == int'(DEPTH) && loaded, "no step before load");
      tk = en && in_avail;
      ref_vld = {ref_vld[NST-2:0], tk};
      check(stage_en == ref_vld, "stage_en");
      check(in_pop == tk, "in_pop");
      if (tk) taken++; else bubbles++;
      busy_left = $urandom_range(1, 6);
    end else begin
      check(!in_pop, "in_pop without step");
    end
    if (out_push) begin
      check(ref_vld[NST-1] && !out_full && !pe_busy, "out_push");
      ref_vld[NST-1] = 1'b0;
      pushed++;
    end
    if (stall) begin
      check(ref_vld[NST-1] && out_full, "stall");
      stalls++;
    end
  end

  // PE and environment models.
  always @(negedge clk) if (rst_n) begin
    if (busy_left > 0) begin pe_busy = 1; busy_left--; end else pe_busy = 0;
    in_avail = ($urandom % 3 != 0);
    out_full = ($urandom % 4 == 0);
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    for (int rep = 0; rep < 3; rep++) begin
      en = 1;
      repeat (400) @(negedge clk);
      en = 0;
      repeat (200) @(negedge clk);
      check(ref_vld == '0 && taken == pushed, "pipeline drained");
      check(!loaded || ref_vld == '0, "idle after drain");
    end
    check(bubbles > 0 && stalls > 0 && loads == 3, "coverage");
    $display("bubbles=%0d stalls=%0d loads=%0d taken=%0d", bubbles, stalls, loads, taken);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
