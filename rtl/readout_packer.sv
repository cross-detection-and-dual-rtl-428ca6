// readout_packer: sends the raw capture of every hit to the host over a byte
// stream (a UART downstream).
//
// The published channel ships all 176 captured thermometer bits (172 delay-line
// taps and 4 monitor taps) with the 12-bit coarse count for every hit, and
// does the conversion and calibration on the host. On a hit, when idle, this
// block latches {coarse, eop_code, sop_code} (zero-padded to whole bytes) and
// emits a sync byte (tdc_pkg::SYNC_BYTE) followed by the payload, least
// significant byte first. Hits that arrive while a record is still being sent
// are dropped and counted in `dropped`, which saturates. Record format, the
// absence of a buffer and the drop counter are this design's own choices.
//
// Interface: hit/sop_code/eop_code/coarse are sampled on the same clock edge;
// tx_valid/tx_ready/tx_data is a valid-ready byte stream (a byte moves when
// both are high; tx_data holds while tx_valid waits). Timing: the sync byte is
// offered the cycle after the hit; a record is 1 + N_BYTES bytes.
`timescale 1ps/1ps
module readout_packer
  import tdc_pkg::*;
#(
  parameter int unsigned N_TAPS   = 172,
  parameter int unsigned COARSE_W = 12,
  localparam int unsigned REC_BITS = N_TAPS + 4 + COARSE_W,
  localparam int unsigned N_BYTES  = (REC_BITS + 7) / 8
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                hit,
  input  logic [N_TAPS-1:0]   sop_code,
  input  logic [3:0]          eop_code,
  input  logic [COARSE_W-1:0] coarse,
  output logic                tx_valid,
  input  logic                tx_ready,
  output logic [7:0]          tx_data,
  output logic                busy,
  output logic [15:0]         dropped
);

  typedef enum logic [1:0] {S_IDLE, S_SYNC, S_DATA} state_t;

  state_t                   state;
  logic [8*N_BYTES-1:0]     payload;
  logic [$clog2(N_BYTES+1)-1:0] byte_idx;

  assign busy     = (state != S_IDLE);
  assign tx_valid = (state != S_IDLE);
  assign tx_data  = (state == S_SYNC) ? SYNC_BYTE : payload[7:0];

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_IDLE;
      byte_idx <= '0;
      dropped  <= '0;
      payload  <= '0;
    end else begin
      if (hit && state != S_IDLE && dropped != 16'hFFFF) dropped <= dropped + 1'b1;
      case (state)
        S_IDLE: if (hit) begin
          payload  <= (8*N_BYTES)'({coarse, eop_code, sop_code});
          byte_idx <= '0;
          state    <= S_SYNC;
        end
        S_SYNC: if (tx_ready) state <= S_DATA;
        S_DATA: if (tx_ready) begin
          payload  <= payload >> 8;
          byte_idx <= byte_idx + 1'b1;
          if (byte_idx == ($bits(byte_idx))'(N_BYTES - 1)) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A byte offered to the UART stays unchanged until it is taken.
  property p_hold;
    @(posedge clk) disable iff (rst) (tx_valid && !tx_ready) |=> (tx_valid && $stable(tx_data));
  endproperty
  a_hold: assert property (p_hold);

endmodule
