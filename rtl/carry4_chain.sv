// carry4_chain: behavioural model of a chain of Xilinx CARRY4 cells used as a
// tapped delay line. Not synthesizable: on the FPGA this is the vendor's carry
// primitive cascaded N_CARRY4 times; this model exists so that the capture and
// encoding logic can be simulated against realistic tap timing.
//
// Every tap is a transport-delayed copy of chain_in. Cell c adds CARRY4_PS to
// the path; inside a cell the four outputs switch at OFF0..OFF3 after the cell's
// entry. The published observation is that the even outputs of a Virtex-7
// CARRY4 switch before the preceding odd ones (P2 before P1, P4 before P3), so
// the defaults order the outputs P2, P1, P4, P3 in time. The offsets and the
// 43 ps cell delay (43 cells = 1.85 ns, just over one 1.818 ns clock period)
// are this model's own numbers. DELAY_SCALE_PCT stretches every delay, standing
// in for a slower (hotter) chain.
//
// Interface: chain_in, taps[4*N_CARRY4-1:0] in physical order (taps[0] = P1).
// Timing: a pure delay element; tap i repeats every edge of chain_in
// tap_delay(i) ps later (integer ps, rounded down after scaling).
`timescale 1ps/1ps
module carry4_chain #(
  parameter int unsigned N_CARRY4        = 43,
  parameter int unsigned CARRY4_PS       = 43,
  parameter int unsigned OFF0            = 14,  // P1
  parameter int unsigned OFF1            = 8,   // P2
  parameter int unsigned OFF2            = 36,  // P3
  parameter int unsigned OFF3            = 29,  // P4
  parameter int unsigned DELAY_SCALE_PCT = 100
) (
  input  logic                    chain_in,
  output logic [4*N_CARRY4-1:0]   taps
);

  function automatic int unsigned tap_delay(int unsigned i);
    int unsigned off;
    case (i % 4)
      0: off = OFF0;
      1: off = OFF1;
      2: off = OFF2;
      default: off = OFF3;
    endcase
    return (((i / 4) * CARRY4_PS + off) * DELAY_SCALE_PCT) / 100;
  endfunction

  // One delay element per tap; all start idle (low).
  logic tap_q [4*N_CARRY4];
  initial tap_q = '{default: 1'b0};

  for (genvar i = 0; i < 4 * N_CARRY4; i++) begin : g_tap
    localparam int unsigned D = tap_delay(i);
    // transport delay: every edge of chain_in is replayed D ps later, so
    // pulses shorter than D travel intact
    always @(posedge chain_in or negedge chain_in) begin
      if (chain_in) fork #(D) tap_q[i] <= 1'b1; join_none
      else          fork #(D) tap_q[i] <= 1'b0; join_none
    end
    assign taps[i] = tap_q[i];
  end

endmodule
