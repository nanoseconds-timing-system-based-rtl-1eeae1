`timescale 1ns/1ps
// timing_system_top - one backend board and the N_GCU frontend boards it
// serves, wired as in the system (one downlink fanned out to all frontends,
// one uplink per frontend).
//
// The parts between the boards are not logic and are left outside as ports:
//  - the downlink cable and each frontend's clock and data recovery chip:
//    bec_tx_line leaves here; gcu_clk[i] (recovered 250 MHz clock) and
//    gcu_cdr_data[i] (retimed data) come back in;
//  - each uplink cable and the backend's LVDS input capture: gcu_tx_line[i]
//    leaves here (after the frontend's fine delay); bec_rx_sample[i], the
//    stream as captured on bec_clk, comes back in.
// Operation: reset; wait for the frontends to align on the downlink idle
// commands and the backend on the uplink idles; pulse calib_start (serial
// link synchronization of all uplinks); when calib_done, raise ptp_enable
// and gcu_ptp_enable: the backend then measures and corrects the offset of
// each calibrated frontend in turn, periodically.
//
// Parameters other than N_GCU and TIME_W set timing constants of the
// blocks; their defaults are those of the blocks.
module timing_system_top #(
  parameter int unsigned N_GCU           = 48,
  parameter int unsigned TIME_W          = 48,
  parameter int unsigned BEC_IDLE_PERIOD = 1024,
  parameter int unsigned GCU_IDLE_PERIOD = 128,
  parameter int unsigned GCU_SEARCH      = 2400,
  parameter int unsigned BEC_SEARCH      = 400,
  parameter int unsigned SYNC_PERIOD     = 4096,
  parameter int unsigned WATCHDOG        = 8192,
  parameter int unsigned SETTLE          = 2048,
  parameter int unsigned DWELL           = 1024,
  parameter int unsigned ACK_TIMEOUT     = 4096,
  parameter int unsigned MAX_TAP         = 124
) (
  // backend
  input  logic                     bec_clk,
  input  logic                     bec_rst_n,
  output logic                     bec_tx_line,
  input  logic [N_GCU-1:0]         bec_rx_sample,
  input  logic                     calib_start,
  input  logic                     ptp_enable,
  input  logic                     bec_pulse_arm,
  input  logic [TIME_W-1:0]        pulse_time,
  output logic                     bec_pulse_out,
  output logic [TIME_W-1:0]        global_time,
  output logic                     calib_busy,
  output logic                     calib_done,
  output logic [N_GCU-1:0]         link_ok,
  output logic [7:0]               best_tap [N_GCU],
  output logic [7:0]               eye_width [N_GCU],
  output logic [N_GCU-1:0]         bec_rx_aligned,
  output logic [15:0]              bec_err_count [N_GCU],
  output logic [31:0]              bec_ptp_exchanges,
  output logic [31:0]              bec_ptp_timeouts,
  // frontends
  input  logic [N_GCU-1:0]         gcu_clk,
  input  logic [N_GCU-1:0]         gcu_rst_n,
  input  logic [N_GCU-1:0]         gcu_cdr_data,
  output logic [N_GCU-1:0]         gcu_tx_line,
  input  logic [N_GCU-1:0]         gcu_ptp_enable,
  input  logic [N_GCU-1:0]         gcu_pulse_arm,
  output logic [N_GCU-1:0]         gcu_pulse_out,
  output logic [TIME_W-1:0]        local_time [N_GCU],
  output logic [N_GCU-1:0]         gcu_aligned,
  output logic [15:0]              gcu_err_count [N_GCU],
  output logic [7:0]               gcu_tap_count [N_GCU],
  output logic signed [TIME_W-1:0] gcu_last_offset [N_GCU],
  output logic [31:0]              gcu_ptp_exchanges [N_GCU],
  output logic [31:0]              gcu_ptp_corrections [N_GCU],
  output logic [31:0]              gcu_ptp_timeouts [N_GCU]
);
  bec_top #(
    .N_GCU(N_GCU), .TIME_W(TIME_W), .IDLE_PERIOD(BEC_IDLE_PERIOD),
    .SEARCH_TIMEOUT(BEC_SEARCH), .SYNC_PERIOD(SYNC_PERIOD), .WATCHDOG(WATCHDOG),
    .SETTLE(SETTLE), .DWELL(DWELL), .ACK_TIMEOUT(ACK_TIMEOUT), .MAX_TAP(MAX_TAP),
    .COARSE(5'b00110)
  ) u_bec (
    .clk          (bec_clk),
    .rst_n        (bec_rst_n),
    .rx_sample    (bec_rx_sample),
    .tx_line      (bec_tx_line),
    .calib_start,
    .ptp_enable,
    .pulse_arm    (bec_pulse_arm),
    .pulse_time,
    .pulse_out    (bec_pulse_out),
    .global_time,
    .calib_busy,
    .calib_done,
    .link_ok,
    .best_tap,
    .eye_width,
    .rx_aligned   (bec_rx_aligned),
    .err_count    (bec_err_count),
    .ptp_exchanges(bec_ptp_exchanges),
    .ptp_timeouts (bec_ptp_timeouts)
  );

  for (genvar i = 0; i < N_GCU; i++) begin : g_gcu
    gcu_top #(
      .TIME_W(TIME_W), .IDLE_PERIOD(GCU_IDLE_PERIOD),
      .SEARCH_TIMEOUT(GCU_SEARCH), .WATCHDOG(WATCHDOG), .COARSE(5'b00000)
    ) u_gcu (
      .clk            (gcu_clk[i]),
      .rst_n          (gcu_rst_n[i]),
      .gcu_addr       (14'(i)),
      .cdr_data       (gcu_cdr_data[i]),
      .tx_line        (gcu_tx_line[i]),
      .ptp_enable     (gcu_ptp_enable[i]),
      .pulse_arm      (gcu_pulse_arm[i]),
      .pulse_time     (pulse_time),
      .pulse_out      (gcu_pulse_out[i]),
      .local_time     (local_time[i]),
      .aligned        (gcu_aligned[i]),
      .err_count      (gcu_err_count[i]),
      .tap_count      (gcu_tap_count[i]),
      .last_offset    (gcu_last_offset[i]),
      .ptp_exchanges  (gcu_ptp_exchanges[i]),
      .ptp_corrections(gcu_ptp_corrections[i]),
      .ptp_timeouts   (gcu_ptp_timeouts[i])
    );
  end
endmodule
