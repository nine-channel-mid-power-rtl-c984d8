`timescale 1ns/1fs
// pll_model: behavioural model of the FPGA's phase-locked loop. Not
// synthesizable: in the FPGA this is a hard PLL block configured by the
// vendor tools.
//
// It takes the external clock (10-80 MHz in the paper's use) and produces the
// memory clock at MULT times its frequency (640 MHz from 80 MHz), shifted by
// a programmable delay `pr` so the pulse pattern can be lined up with an
// external system such as a pulsed laser. Multiplication and the adjustable
// delay follow the paper; the step and range of the delay, the lock rule and
// the reset are this model's choices, after the usual behaviour of such PLLs.
//
// How the model works: it times each rising edge of ext_clk. Once LOCK_CYCLES
// consecutive periods agree to within 1 %, `locked` rises and from then on
// every rising edge of ext_clk starts a burst of MULT output periods, each
// half period being (ext period)/(2*MULT), beginning pr*(output period)/
// PHASE_DIV after that edge. With the default PR_W = 7 the delay reaches
// 127/8 output periods, i.e. just under two external clock periods, so it
// covers at least one full external period. Successive bursts join without a
// gap, so clk_out is a steady clock. A change of `pr` takes effect at the next
// external edge; a step backwards can shorten one output period, so change
// `pr` only while the pattern is stopped. An irregular ext_clk period or
// `areset` drops `locked` and stops the output.
module pll_model #(
  parameter int unsigned MULT        = pulse_gen_pkg::MULT,
  parameter int unsigned PHASE_DIV   = pulse_gen_pkg::PHASE_DIV,
  parameter int unsigned PR_W        = pulse_gen_pkg::PR_W,
  parameter int unsigned LOCK_CYCLES = 4
) (
  input  logic            ext_clk,
  input  logic            areset,
  input  logic [PR_W-1:0] pr,
  output logic            clk_out,
  output logic            locked
);

  realtime     t_last;
  realtime     period;
  bit          seen_edge;
  int unsigned stable;

  initial begin
    clk_out   = 1'b0;
    locked    = 1'b0;
    t_last    = 0.0;
    period    = 0.0;
    seen_edge = 1'b0;
    stable    = 0;
  end

  task automatic burst(input realtime delay, input realtime half);
    #(delay);
    repeat (MULT) begin
      clk_out = 1'b1;
      #(half);
      clk_out = 1'b0;
      #(half);
    end
  endtask

  initial forever begin
    @(posedge ext_clk or posedge areset);
    if (areset) begin
      locked    = 1'b0;
      seen_edge = 1'b0;
      stable    = 0;
    end else begin
      realtime now, p;
      now = $realtime;
      if (seen_edge) begin
        p = now - t_last;
        if (period > 0.0 && p < 1.01 * period && p > 0.99 * period) begin
          if (stable < LOCK_CYCLES) stable = stable + 1;
        end else begin
          stable = 0;
        end
        period = p;
      end
      t_last    = now;
      seen_edge = 1'b1;
      locked    = (stable >= LOCK_CYCLES);
      if (locked)
        fork
          burst(real'(pr) * period / real'(MULT * PHASE_DIV), period / real'(2 * MULT));
        join_none
    end
  end

endmodule
