`timescale 1ns / 1ps
// ro_counter - oscillation counter of the RO-PUF.
//
// Counts the rising edges of one ring oscillator.  The oscillator output is
// the counter's clock, so the count runs at the oscillator frequency and
// needs no synchronisation to the bus clock.  `clr_n` clears the count
// asynchronously; the PUF controller pulls it low before each evaluation,
// while the oscillators are stopped.  The count saturates at all ones instead
// of wrapping, so an oscillator that is much faster than the counter width
// allows still compares as the faster one (a choice of this design).
//
// The count is read by the bus-clock domain only after the oscillator has
// been stopped, when it no longer changes.
module ro_counter #(
  parameter int unsigned WIDTH = 16
) (
  input  logic             ro_clk,
  input  logic             clr_n,
  output logic [WIDTH-1:0] count
);

  always_ff @(posedge ro_clk or negedge clr_n) begin
    if (!clr_n)
      count <= '0;
    else if (count != '1)
      count <= count + 1'b1;
  end

endmodule
