// tdc_input_logic: turns an asynchronous hit into the TDC_IN pulse that is
// launched into the delay lines.
//
// TDC_IN rises when TIME_IN rises: that edge is the start of propagation (SOP)
// and carries the hit time. The first rising CLK edge afterwards ends the pulse:
// that falling edge is the end of propagation (EOP), locked to CLK, so it
// carries the clock's jitter and the chain's speed but no hit information.
//
// Two flip-flops with D tied high, as in the published input logic: `sop_q` is
// clocked by TIME_IN and is TDC_IN; `eop_q` is clocked by CLK. `eop_q` is held
// clear while TDC_IN is low, so the first CLK edge after the SOP sets it, which
// clears `sop_q` (the EOP) and thereby clears `eop_q` again. How the two reset
// pins are cross-wired is this design's reading of the published drawing; the
// behaviour (SOP on TIME_IN, EOP on the next CLK edge) is the published one.
//
// Timing: asynchronous. TDC_IN high time is the interval from TIME_IN to the
// next CLK rising edge, 0..1 CLK period. A TIME_IN edge while TDC_IN is high is
// ignored. The two resets form an intended asynchronous loop that settles after
// one flip-flop clear-to-output delay.
`timescale 1ps/1ps
module tdc_input_logic (
  input  logic time_in,   // asynchronous hit
  input  logic clk,       // CLK
  input  logic rst,       // asynchronous reset, active high
  output logic tdc_in     // TDC_IN
);

  logic sop_q;  // set by TIME_IN
  logic eop_q;  // set by CLK while a pulse is in flight
  logic sop_clr;
  logic eop_clr;

  assign sop_clr = rst | eop_q;
  assign eop_clr = rst | ~sop_q;

  always_ff @(posedge time_in or posedge sop_clr) begin
    if (sop_clr) sop_q <= 1'b0;
    else         sop_q <= 1'b1;
  end

  always_ff @(posedge clk or posedge eop_clr) begin
    if (eop_clr) eop_q <= 1'b0;
    else         eop_q <= 1'b1;
  end

  assign tdc_in = sop_q;

endmodule
