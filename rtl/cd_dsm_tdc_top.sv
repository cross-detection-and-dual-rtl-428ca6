// cd_dsm_tdc_top: one channel of the cross-detection, dual-side-monitoring TDC.
//
// TIME_IN is turned into a pulse, TDC_IN, whose rising edge (SOP) marks the hit
// and whose falling edge (EOP) follows on the next CLK edge. TDC_IN runs down a
// 43-CARRY4 delay line (172 taps) and, in parallel, one extra monitor CARRY4.
// On every CLK_CAPTURE edge (same frequency as CLK, phase delayed so that the
// EOP lies inside the monitor CARRY4) all 176 taps are sampled and read in
// cross-detection order P2 P1 P4 P3. The SOP position is corrected by the EOP
// position (half a tap per tap of EOP deviation), combined with the 12-bit
// coarse count into a time tag, and the raw capture is also sent over a UART.
//
// The carry chains are behavioural models of the FPGA primitive (with ps
// delays), so this top simulates the whole channel but only the logic around
// the chains is synthesizable. The two clocks come from the FPGA clock manager
// and are inputs here. DELAY_SCALE_PCT only scales the carry-chain model's
// delays (a slower, hotter chain) and has no hardware meaning.
//
// Interface: time_in, clk, clk_capture, rst (synchronous to clk_capture for the
// back end, asynchronous for the input logic). tag_* is a registered time tag,
// valid for one cycle one CLK_CAPTURE edge after the capture. uart_txd carries
// one record per hit not dropped; dropped counts the rest.
`timescale 1ps/1ps
module cd_dsm_tdc_top
  import tdc_pkg::*;
#(
  parameter int unsigned N_CARRY4     = N_CARRY4_DEF,
  parameter int unsigned COARSE_W     = COARSE_W_DEF,
  parameter int unsigned EOP_REF      = 2,
  parameter int unsigned CLKS_PER_BIT = 4774,
  parameter int unsigned DELAY_SCALE_PCT = 100,  // carry-model speed, simulation only
  localparam int unsigned N_TAPS = TAPS_PER_CARRY4 * N_CARRY4,
  localparam int unsigned POS_W  = $clog2(N_TAPS + 1),
  localparam int unsigned FINE_W = POS_W + 2
) (
  input  logic                     time_in,
  input  logic                     clk,
  input  logic                     clk_capture,
  input  logic                     rst,
  output logic                     tdc_in,
  output logic                     tag_valid,
  output logic [COARSE_W-1:0]      tag_coarse,
  output logic [POS_W-1:0]         tag_sop_pos,
  output logic [2:0]               tag_eop_pos,
  output logic signed [FINE_W-1:0] tag_fine_half,
  output logic [N_TAPS-1:0]        raw_sop_q,
  output logic [N_TAPS-1:0]        cd_sop_q,
  output logic [3:0]               raw_eop_q,
  output logic [3:0]               cd_eop_q,
  output logic                     uart_txd,
  output logic                     readout_busy,
  output logic [15:0]              dropped
);

  logic [N_TAPS-1:0]   dl_taps;
  logic [3:0]          mon_taps;
  logic [COARSE_W-1:0] coarse;
  logic                hit;
  logic                tx_valid, tx_ready;
  logic [7:0]          tx_data;

  tdc_input_logic u_input (
    .time_in (time_in),
    .clk     (clk),
    .rst     (rst),
    .tdc_in  (tdc_in)
  );

  // SOP delay line and EOP monitor, both fed from TDC_IN.
  carry4_chain #(.N_CARRY4(N_CARRY4), .DELAY_SCALE_PCT(DELAY_SCALE_PCT)) u_delay_line (
    .chain_in (tdc_in),
    .taps     (dl_taps)
  );

  carry4_chain #(.N_CARRY4(1), .DELAY_SCALE_PCT(DELAY_SCALE_PCT)) u_eop_monitor (
    .chain_in (tdc_in),
    .taps     (mon_taps)
  );

  cd_capture #(.N_TAPS(N_TAPS)) u_cap_sop (
    .clk_capture (clk_capture),
    .taps        (dl_taps),
    .raw_q       (raw_sop_q),
    .cd_q        (cd_sop_q)
  );

  cd_capture #(.N_TAPS(4)) u_cap_eop (
    .clk_capture (clk_capture),
    .taps        (mon_taps),
    .raw_q       (raw_eop_q),
    .cd_q        (cd_eop_q)
  );

  coarse_counter #(.COARSE_W(COARSE_W)) u_coarse (
    .clk   (clk_capture),
    .rst   (rst),
    .count (coarse)
  );

  time_tag_unit #(.N_TAPS(N_TAPS), .COARSE_W(COARSE_W), .EOP_REF(EOP_REF)) u_tag (
    .clk           (clk_capture),
    .rst           (rst),
    .sop_code      (cd_sop_q),
    .eop_code      (cd_eop_q),
    .coarse        (coarse),
    .hit           (hit),
    .tag_valid     (tag_valid),
    .tag_coarse    (tag_coarse),
    .tag_sop_pos   (tag_sop_pos),
    .tag_eop_pos   (tag_eop_pos),
    .tag_fine_half (tag_fine_half)
  );

  readout_packer #(.N_TAPS(N_TAPS), .COARSE_W(COARSE_W)) u_readout (
    .clk      (clk_capture),
    .rst      (rst),
    .hit      (hit),
    .sop_code (cd_sop_q),
    .eop_code (cd_eop_q),
    .coarse   (coarse),
    .tx_valid (tx_valid),
    .tx_ready (tx_ready),
    .tx_data  (tx_data),
    .busy     (readout_busy),
    .dropped  (dropped)
  );

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart (
    .clk   (clk_capture),
    .rst   (rst),
    .valid (tx_valid),
    .data  (tx_data),
    .ready (tx_ready),
    .txd   (uart_txd)
  );

endmodule
