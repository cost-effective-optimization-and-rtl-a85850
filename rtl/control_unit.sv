// control_unit: control unit of the accelerator.
//
// After En rises it resets the PE and copies every precomputed parameter from
// the Cfg_unit RAM into the PE (one read per clock), then runs the PE as a
// lockstep pipeline of NST = STAGES+2 stages (pre, STAGES exponentiation
// stages, post), as in the paper's data-flow figure: at a pipeline step every
// stage that holds a ciphertext is started on the same clock edge, and the
// next step comes only when all of them have finished. A valid bit per stage
// follows each ciphertext through the pipeline. At a step the control takes a
// new ciphertext from the data path if one is waiting (and En is high), or
// inserts a bubble otherwise; when the last stage has produced a plaintext it
// is written to the data path's output FIFO, and the pipeline stalls while
// that FIFO is full. With En low no new ciphertext is taken, the pipeline
// drains, and the unit returns to idle (a later En reloads the parameters).
// The paper states the unit's duties; this sequencing is this design's own.
//
// Outputs step/stage_en (stage_en[0] = pre, [1..STAGES] = ME, [STAGES+1] =
// post) drive the PE; stall is high while a finished result waits for space.
module control_unit #(
  parameter int unsigned STAGES = 3,
  localparam int unsigned NST   = STAGES + 2,
  localparam int unsigned DEPTH = mesa_pkg::cfg_depth(STAGES),
  localparam int unsigned AW    = mesa_pkg::CFG_AW
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           en,
  // Cfg_unit read port
  output logic           cfg_re,
  output logic [AW-1:0]  cfg_raddr,
  // PE parameter load, reset and pipeline control
  output logic           pe_rst_n,
  output logic           prm_we,
  output logic [AW-1:0]  prm_addr,
  output logic           step,
  output logic [NST-1:0] stage_en,
  input  logic           pe_busy,
  // data path control
  input  logic           in_avail,
  output logic           in_pop,
  input  logic           out_full,
  output logic           out_push,
  // status
  output logic           loaded,
  output logic           stall
);
  typedef enum logic [2:0] {IDLE, LOAD, READY, RUN, FINISH} state_e;

  state_e          st_q;
  logic [AW:0]     rd_cnt_q;
  logic [NST-1:0]  vld_q, vld_n;
  logic            take;

  always_comb begin
    take     = en && in_avail;
    vld_n    = {vld_q[NST-2:0], take};
    step     = (st_q == READY) && ((|vld_q) || take);
    stage_en = vld_n;
    in_pop   = step && take;
    cfg_re   = (st_q == LOAD) && (rd_cnt_q < (AW+1)'(DEPTH));
    cfg_raddr = rd_cnt_q[AW-1:0];
    out_push = (st_q == FINISH) && vld_q[NST-1] && !out_full;
    stall    = (st_q == FINISH) && vld_q[NST-1] && out_full;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q     <= IDLE;
      rd_cnt_q <= '0;
      vld_q    <= '0;
      pe_rst_n <= 1'b0;
      prm_we   <= 1'b0;
      prm_addr <= '0;
      loaded   <= 1'b0;
    end else begin
      pe_rst_n <= !((st_q == IDLE) && en);
      prm_we   <= cfg_re;
      prm_addr <= cfg_raddr;
      unique case (st_q)
        IDLE: if (en) begin
          rd_cnt_q <= '0;
          vld_q    <= '0;
          loaded   <= 1'b0;
          st_q     <= LOAD;
        end
        LOAD: begin
          if (cfg_re) rd_cnt_q <= rd_cnt_q + 1'b1;
          else begin
            loaded <= 1'b1;
            st_q   <= READY;
          end
        end
        READY: begin
          if (step) begin
            vld_q <= vld_n;
            st_q  <= RUN;
          end else if (!en) begin
            st_q <= IDLE;
          end
        end
        RUN: if (!pe_busy) st_q <= FINISH;
        FINISH: if (!stall) begin
          vld_q[NST-1] <= 1'b0;   // result handed to the data path
          st_q         <= READY;
        end
        default: st_q <= IDLE;
      endcase
    end
  end

  // Every started stage raises busy on the clock edge that starts it.
  logic stepped_q;
  always_ff @(posedge clk) begin
    stepped_q <= step;
    if (rst_n && stepped_q) assert (pe_busy);
  end
endmodule
