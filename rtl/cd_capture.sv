// cd_capture: the capture flip-flops of the delay line with cross-detection.
//
// Every tap of the carry chain is sampled by a D flip-flop on the rising edge
// of CLK_CAPTURE. The captured word is then read in cross-detection (CD) order:
// within every group of four taps the two pairs are swapped, so physical order
// P1 P2 P3 P4 is read as P2 P1 P4 P3. Because the even carry outputs of a
// CARRY4 switch before the preceding odd ones, the swapped word is (nearly)
// a clean thermometer code and needs no bubble correction. Sampling every tap
// and swapping after the flip-flops, not in the routing, follows the published
// design; it costs no logic, only wiring.
//
// Interface: taps[N_TAPS-1:0] physical order; raw_q is the captured word in
// physical order, cd_q the same word in CD order. N_TAPS must be a multiple of 4.
// Timing: one CLK_CAPTURE edge from taps to both outputs. No reset: the
// flip-flops are rewritten every cycle.
`timescale 1ps/1ps
module cd_capture #(
  parameter int unsigned N_TAPS = 172
) (
  input  logic              clk_capture,
  input  logic [N_TAPS-1:0] taps,
  output logic [N_TAPS-1:0] raw_q,
  output logic [N_TAPS-1:0] cd_q
);

  always_ff @(posedge clk_capture) raw_q <= taps;

  // Cross-detection: bit i of the CD word comes from physical bit i^1.
  always_comb begin
    for (int unsigned i = 0; i < N_TAPS; i++) cd_q[i] = raw_q[i ^ 1];
  end

  initial assert (N_TAPS % 4 == 0) else $error("N_TAPS must be a multiple of 4");

endmodule
