// sop_encoder: thermometer-to-binary conversion of the start-of-propagation code.
//
// The SOP position is the first transition seen when the code is scanned from
// its far end, i.e. the index of the highest 1 plus one (0 when the code holds
// no 1). There is deliberately no bubble correction: cross-detection ordering
// upstream removes almost all bubbles, and a remaining bubble below the highest
// 1 does not change the result. The published design states the rule; the
// plain priority search is this design's own circuit.
//
// Interface: code[N_TAPS-1:0] in CD order, pos in 0..N_TAPS.
// Timing: combinational.
`timescale 1ps/1ps
module sop_encoder #(
  parameter int unsigned N_TAPS = 172,
  localparam int unsigned POS_W = $clog2(N_TAPS + 1)
) (
  input  logic [N_TAPS-1:0] code,
  output logic [POS_W-1:0]  pos
);

  always_comb begin
    pos = '0;
    for (int unsigned i = 0; i < N_TAPS; i++) begin
      if (code[i]) pos = POS_W'(i + 1);
    end
  end

endmodule
