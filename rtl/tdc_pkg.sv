// tdc_pkg: constants and types shared by the CD-DSM time-to-digital converter.
//
// The delay line is 43 CARRY4 cells (172 taps) plus one monitor CARRY4 (4 taps)
// for the end of propagation (EOP); the coarse counter is 12 bits wide. These
// three numbers are the published configuration. The time-tag record layout
// and the serial record format are this design's own choices.
`timescale 1ps/1ps
package tdc_pkg;

  localparam int unsigned N_CARRY4_DEF = 43;             // SOP delay line length
  localparam int unsigned TAPS_PER_CARRY4 = 4;           // carry outputs per CARRY4
  localparam int unsigned COARSE_W_DEF = 12;             // coarse counter width

  // Width of a tap position 0..n.
  function automatic int unsigned pos_width(int unsigned n);
    return $clog2(n + 1);
  endfunction

  // Serial record sent per hit: one sync byte, then the payload
  // {zero pad, coarse, EOP code, SOP code} least significant byte first.
  localparam logic [7:0] SYNC_BYTE = 8'hA5;

endpackage
