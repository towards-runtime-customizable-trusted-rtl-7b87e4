`timescale 1ns / 1ps
// ro_cell - behavioural model of one ring oscillator of the RO-PUF.
//
// This file is a behavioural model, not synthesizable logic.  On the FPGA a
// ring oscillator is an odd chain of inverting LUTs closed into a loop and
// gated by an enable; its frequency is fixed by the delays of the particular
// piece of silicon, which is what makes the PUF device-specific.  A
// combinational loop cannot be simulated cycle by cycle, so this model
// replaces the loop by a timed toggle.
//
// Interface: `en` high lets the cell oscillate with a half period of
// HALF_PERIOD_NS nanoseconds; `en` low stops it with `osc` held low.  The
// half period is the model of process variation: the enclosing PUF gives
// every cell a slightly different value.
//
// Synthesis tools that ignore the delay see the toggle as what a ring
// oscillator is, a combinational loop through an inverter, and warn about it;
// that loop is the intended circuit.
module ro_cell #(
  parameter real HALF_PERIOD_NS = 1.5
) (
  input  logic en,
  output logic osc
);

  initial osc = 1'b0;

  always begin
    if (en) begin
      #(HALF_PERIOD_NS);
      osc = en ? ~osc : 1'b0;
    end else begin
      osc = 1'b0;
      @(en);
    end
  end

endmodule
