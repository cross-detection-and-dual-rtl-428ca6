// dsm_correction: dual-side monitoring. Decodes where the end of propagation
// (EOP) sits in the monitor CARRY4 and corrects the start-of-propagation (SOP)
// position with it.
//
// The EOP falls on a CLK edge, so how far it has run when CLK_CAPTURE samples
// it measures the capture clock's jitter and the chain's current speed, not the
// hit. Both disturb the SOP in the same direction, so the SOP is corrected by
// half a tap per EOP tap of deviation from a reference position:
//   fine_half = 2*sop_pos + (EOP_REF - eop_pos)   (half-tap units)
// The factor 0.5 is the published one; EOP_REF (the reference position, here
// the middle of the monitor) is this design's choice.
//
// eop_pos is the number of 0s in the CD-ordered monitor code M2 M1 M4 M3, i.e.
// how many monitor taps the falling edge has passed (1..4 for a valid hit).
// A capture is a hit when the first monitor tap is already 0 (the EOP has
// entered the monitor) and some tap of the second delay-line CARRY4 is 1 (the
// pulse is still in the line behind the EOP). That qualification rule is this
// design's own: it rejects the capture before the EOP, where only the SOP has
// entered, and the one after, where only the tail of the pulse is left.
//
// Timing: combinational.
`timescale 1ps/1ps
module dsm_correction #(
  parameter int unsigned N_TAPS  = 172,
  parameter int unsigned EOP_REF = 2,
  localparam int unsigned POS_W  = $clog2(N_TAPS + 1),
  localparam int unsigned FINE_W = POS_W + 2
) (
  input  logic [POS_W-1:0]         sop_pos,
  input  logic [3:0]               eop_code,    // CD order, bit 0 = M2
  input  logic [3:0]               early_taps,  // delay-line taps 4..7, CD order
  output logic                     hit,
  output logic [2:0]               eop_pos,
  output logic signed [FINE_W-1:0] fine_half
);

  always_comb begin
    eop_pos = 3'(!eop_code[0]) + 3'(!eop_code[1]) + 3'(!eop_code[2]) + 3'(!eop_code[3]);
    hit     = !eop_code[0] && (early_taps != 4'b0000);
    fine_half = $signed({1'b0, sop_pos, 1'b0}) + FINE_W'(EOP_REF) - FINE_W'(eop_pos);
  end

endmodule
