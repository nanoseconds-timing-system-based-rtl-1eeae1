`timescale 1ns/1ps
// bec_top - the timing logic of the backend board (BEC).
//
// Everything runs on the 250 MHz global clock. The blocks:
//   global_time_counter  the global time (count of 4 ns periods);
//   ttc_encoder          one downlink transmitter whose line is fanned out to
//                        all N_GCU frontends; broadcasts an idle command every
//                        IDLE_PERIOD cycles; clients: link_sync_master (0),
//                        ptp_master (1);
//   ttc_decoder x N_GCU  one uplink receiver per frontend, coarse delay
//                        COARSE (0b00110 in the design overview, matching the
//                        latency of the frontend clock-recovery chip);
//   link_sync_master     eye scan and fine-delay placement of every uplink;
//   ptp_master           round-robin PTP master over the calibrated links;
//   pulse_gen            output pulse at a programmed global time.
//
// Ports: rx_sample[i] is the uplink of frontend i as captured by the input
// flip-flop of its LVDS receiver, i.e. sampled on `clk`; whether that
// capture is reliable depends on the phase of the stream, which is what the
// link synchronization adjusts. tx_line goes to the downlink cable drivers.
// The downlink fine delay of the backend is set to 0 in the design overview
// and is therefore omitted.
module bec_top
  import ttc_pkg::*;
#(
  parameter int unsigned N_GCU          = 48,
  parameter int unsigned TIME_W         = 48,
  parameter int unsigned IDLE_PERIOD    = 1024,
  parameter int unsigned SEARCH_TIMEOUT = 400,
  parameter int unsigned SYNC_PERIOD    = 4096,
  parameter int unsigned WATCHDOG       = 8192,
  parameter int unsigned SETTLE         = 2048,
  parameter int unsigned DWELL          = 1024,
  parameter int unsigned ACK_TIMEOUT    = 4096,
  parameter int unsigned MAX_TAP        = 124,
  parameter logic [4:0]  COARSE         = 5'b00110
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_GCU-1:0]  rx_sample,
  output logic              tx_line,
  input  logic              calib_start,
  input  logic              ptp_enable,
  input  logic              pulse_arm,
  input  logic [TIME_W-1:0] pulse_time,
  output logic              pulse_out,
  output logic [TIME_W-1:0] global_time,
  output logic              calib_busy,
  output logic              calib_done,
  output logic [N_GCU-1:0]  link_ok,
  output logic [7:0]        best_tap [N_GCU],
  output logic [7:0]        eye_width [N_GCU],
  output logic [N_GCU-1:0]  rx_aligned,
  output logic [15:0]       err_count [N_GCU],
  output logic [31:0]       ptp_exchanges,
  output logic [31:0]       ptp_timeouts
);
  localparam int unsigned N_REGS = 32;

  global_time_counter #(.TIME_W(TIME_W)) u_gtime (
    .clk, .rst_n, .load(1'b0), .load_value('0), .time_out(global_time)
  );

  // downlink encoder
  logic [1:0] req, fvalid, grant, accept;
  ttc_frame_t frame [2];

  ttc_encoder #(.N_CLIENTS(2), .IDLE_PERIOD(IDLE_PERIOD)) u_tx (
    .clk, .rst_n,
    .idle_en(1'b1),
    .cha_bit(1'b0),
    .req, .fvalid, .frame, .grant, .accept,
    .line   (tx_line)
  );

  // uplink decoders
  logic [N_GCU-1:0] sof, rx_valid, wr_valid, ack_valid;
  ttc_frame_t       rx_frame [N_GCU];
  logic [7:0]       ack_tap [N_GCU];
  logic             err_clr;

  for (genvar i = 0; i < N_GCU; i++) begin : g_rx
    logic [7:0] regs [N_REGS];
    ttc_decoder #(
      .SEARCH_TIMEOUT(SEARCH_TIMEOUT), .N_REGS(N_REGS), .ERR_W(16)
    ) u_rx (
      .clk, .rst_n,
      .rx_bit       (rx_sample[i]),
      .coarse       (COARSE),
      .my_addr      ('0),
      .addr_match_en(1'b0),
      .err_rst      (err_clr),
      .aligned      (rx_aligned[i]),
      .sof          (sof[i]),
      .rx_valid     (rx_valid[i]),
      .rx_frame     (rx_frame[i]),
      .wr_valid     (wr_valid[i]),
      .err_count    (err_count[i]),
      .regs         (regs)
    );
    assign ack_valid[i] = wr_valid[i] && rx_frame[i].subaddr == SA_TAP_ACK;
    assign ack_tap[i]   = rx_frame[i].data;
  end

  logic calib_done_p;

  link_sync_master #(
    .N_GCU(N_GCU), .MAX_TAP(MAX_TAP), .SETTLE(SETTLE), .DWELL(DWELL),
    .ACK_TIMEOUT(ACK_TIMEOUT), .ERR_W(16)
  ) u_lsm (
    .clk, .rst_n,
    .start    (calib_start),
    .err_count,
    .ack_valid, .ack_tap,
    .err_clr,
    .busy     (calib_busy),
    .done     (calib_done_p),
    .link_ok,
    .best_tap, .eye_width,
    .scan_tap (),
    .req   (req[0]),
    .fvalid(fvalid[0]),
    .frame (frame[0]),
    .grant (grant[0]),
    .accept(accept[0])
  );

  always_ff @(posedge clk) begin
    if (!rst_n)            calib_done <= 1'b0;
    else if (calib_start)  calib_done <= 1'b0;
    else if (calib_done_p) calib_done <= 1'b1;
  end

  ptp_master #(
    .N_GCU(N_GCU), .TIME_W(TIME_W), .SYNC_PERIOD(SYNC_PERIOD), .WATCHDOG(WATCHDOG)
  ) u_ptp (
    .clk, .rst_n,
    .enable   (ptp_enable && calib_done),
    .node_en  (link_ok),
    .global_time,
    .sof, .rx_valid, .rx_frame,
    .req   (req[1]),
    .fvalid(fvalid[1]),
    .frame (frame[1]),
    .grant (grant[1]),
    .accept(accept[1]),
    .t1_g  (),
    .t4_g  (),
    .node  (),
    .exchanges(ptp_exchanges),
    .timeouts (ptp_timeouts)
  );

  pulse_gen #(.TIME_W(TIME_W)) u_pulse (
    .clk, .rst_n,
    .arm       (pulse_arm),
    .sched_time(pulse_time),
    .time_in   (global_time),
    .pulse     (pulse_out),
    .armed     ()
  );
endmodule
