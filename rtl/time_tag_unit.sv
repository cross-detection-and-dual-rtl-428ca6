// time_tag_unit: turns one captured delay-line word and monitor word into a
// time tag.
//
// The SOP position comes from the highest 1 of the CD-ordered delay-line code
// (sop_encoder); the EOP position and the half-tap correction come from
// dsm_correction. On a hit the corrected fine code and the coarse count of the
// same capture edge are registered together. The hit arrived
//   t = coarse * T_CLK - fine_half * (tap delay / 2) + constant,
// so larger fine codes mean earlier hits within the period. Mapping fine codes
// to picoseconds needs a code-density calibration, which is done off-chip.
//
// Interface: sop_code/eop_code from cd_capture (CD order), coarse from
// coarse_counter; `hit` is the combinational hit flag of the current capture,
// the tag_* outputs are registered. Timing: tag_valid pulses one cycle, one
// CLK_CAPTURE edge after the capture edge. Synchronous active-high reset
// clears tag_valid.
`timescale 1ps/1ps
module time_tag_unit #(
  parameter int unsigned N_TAPS   = 172,
  parameter int unsigned COARSE_W = 12,
  parameter int unsigned EOP_REF  = 2,
  localparam int unsigned POS_W   = $clog2(N_TAPS + 1),
  localparam int unsigned FINE_W  = POS_W + 2
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic [N_TAPS-1:0]        sop_code,
  input  logic [3:0]               eop_code,
  input  logic [COARSE_W-1:0]      coarse,
  output logic                     hit,
  output logic                     tag_valid,
  output logic [COARSE_W-1:0]      tag_coarse,
  output logic [POS_W-1:0]         tag_sop_pos,
  output logic [2:0]               tag_eop_pos,
  output logic signed [FINE_W-1:0] tag_fine_half
);

  logic [POS_W-1:0]         sop_pos;
  logic [2:0]               eop_pos;
  logic signed [FINE_W-1:0] fine_half;

  sop_encoder #(.N_TAPS(N_TAPS)) u_sop (
    .code (sop_code),
    .pos  (sop_pos)
  );

  dsm_correction #(.N_TAPS(N_TAPS), .EOP_REF(EOP_REF)) u_dsm (
    .sop_pos    (sop_pos),
    .eop_code   (eop_code),
    .early_taps (sop_code[7:4]),
    .hit        (hit),
    .eop_pos    (eop_pos),
    .fine_half  (fine_half)
  );

  always_ff @(posedge clk) begin
    if (rst) tag_valid <= 1'b0;
    else     tag_valid <= hit;
    if (hit) begin
      tag_coarse    <= coarse;
      tag_sop_pos   <= sop_pos;
      tag_eop_pos   <= eop_pos;
      tag_fine_half <= fine_half;
    end
  end

endmodule
